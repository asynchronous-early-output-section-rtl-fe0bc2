// tb_eo_sol: self-checking test of the early output sum-only logic.
//
// For each of the 8 input values the inputs arrive one at a time in every
// order and leave one at a time in a random order. The sum must stay spacer
// until all three inputs are data, then show a ^ b ^ cin, and on the way back
// stay data until the carry in and one operand are spacer (C-element hold).
// The illegal 11 code must never appear.
`timescale 1ns/1ps
module tb_eo_sol;
  import qdi_pkg::*;
  dr_t a, b, cin, sum;
  int  checks = 0, failures = 0;

  eo_sol dut (.a(a), .b(b), .cin(cin), .sum(sum));

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_sum(input logic [2:0] v, input logic down);
    logic all_d, ab_d;
    dr_t  es;
    all_d = dr_is_data(a) && dr_is_data(b) && dr_is_data(cin);
    ab_d  = dr_is_data(a) && dr_is_data(b);
    es = (all_d || (down && (ab_d || dr_is_data(cin)))) ? dr_enc(^v) : '0;
    checks++;
    if (sum !== es) begin
      failures++;
      $display("FAIL a=%b b=%b cin=%b sum=%b expected %b", a, b, cin, sum, es);
    end
  endtask

  initial begin
    int orders[6][3] = '{'{0,1,2}, '{0,2,1}, '{1,0,2}, '{1,2,0}, '{2,0,1}, '{2,1,0}};
    a = '0; b = '0; cin = '0;
    #1;
    for (int v = 0; v < 8; v++) begin
      for (int o = 0; o < 6; o++) begin
        for (int k = 0; k < 3; k++) begin
          case (orders[o][k])
            0: a   = dr_enc(v[0]);
            1: b   = dr_enc(v[1]);
            default: cin = dr_enc(v[2]);
          endcase
          #1;
          check_sum(3'(v), 1'b0);
        end
        begin
          int first = $urandom_range(2);
          for (int k = 0; k < 3; k++) begin
            case ((first + k) % 3)
              0: a   = '0;
              1: b   = '0;
              default: cin = '0;
            endcase
            #1;
            check_sum(3'(v), 1'b1);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
