// tb_completion_detector: self-checking test of the completion detector.
//
// An 8-bit dual-rail bundle is filled with data one random bit at a time and
// emptied to spacer the same way, 300 times. ACKOUT must stay 1 until the
// last bit holds data, then go to 0, stay 0 while bits return to spacer, and
// go back to 1 only when the last bit is spacer. Both "waits" (a partly
// filled bundle and a partly emptied one) are counted and must occur.
`timescale 1ns/1ps
module tb_completion_detector;
  import qdi_pkg::*;
  localparam int W = 8;
  dr_t [W-1:0] d;
  logic        ackout;
  int checks = 0, failures = 0, n_wait_fill = 0, n_wait_empty = 0;

  completion_detector #(.W(W)) dut (.d(d), .ackout(ackout));

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_ack(input logic e);
    checks++;
    if (ackout !== e) begin
      failures++;
      $display("FAIL d=%b ackout=%b expected %b", d, ackout, e);
    end
  endtask

  initial begin
    int ord[W];
    d = '0;
    #1;
    expect_ack(1'b1);
    for (int t = 0; t < 300; t++) begin
      for (int i = 0; i < W; i++) ord[i] = i;
      ord.shuffle();
      for (int i = 0; i < W; i++) begin
        d[ord[i]] = dr_enc(1'($urandom_range(1)));
        #1;
        expect_ack(i == W - 1 ? 1'b0 : 1'b1);
        if (i < W - 1) n_wait_fill++;
      end
      ord.shuffle();
      for (int i = 0; i < W; i++) begin
        d[ord[i]] = '0;
        #1;
        expect_ack(i == W - 1 ? 1'b1 : 1'b0);
        if (i < W - 1) n_wait_empty++;
      end
    end
    checks++;
    if (n_wait_fill == 0 || n_wait_empty == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
