// tb_c_element: self-checking test of the 2-input C-element.
//
// Walks the inputs through a random sequence of 200 values, one input change
// at a time, and compares the output after every step with a reference that
// follows the C-element rule (both 1 -> 1, both 0 -> 0, else keep). Ends with
// the TB_RESULT line; a watchdog stops a run that hangs.
`timescale 1ns/1ps
module tb_c_element;
  logic a, b, y;
  logic ref_y;
  int   checks = 0, failures = 0;
  int   n_hold = 0, n_set = 0, n_reset = 0;

  c_element dut (.a(a), .b(b), .y(y));

  initial begin
    #100000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a = 0; b = 0; ref_y = 0;
    #1;
    for (int i = 0; i < 200; i++) begin
      if ($urandom_range(1) != 0) a = ~a; else b = ~b;
      #1;
      if (a & b) begin ref_y = 1; n_set++; end
      else if (!a && !b) begin ref_y = 0; n_reset++; end
      else n_hold++;
      checks++;
      if (y !== ref_y) begin
        failures++;
        $display("FAIL step %0d a=%0b b=%0b y=%0b expected %0b", i, a, b, y, ref_y);
      end
    end
    checks++;
    if (n_hold == 0 || n_set == 0 || n_reset == 0) begin
      failures++;
      $display("FAIL hold/set/reset not all exercised");
    end
    $display("hold=%0d set=%0d reset=%0d", n_hold, n_set, n_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
