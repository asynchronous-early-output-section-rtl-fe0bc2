// tb_eo_fa: self-checking test of the early output full adder.
//
// For each of the 8 operand/carry values the three dual-rail inputs are
// brought from spacer to data one at a time in each of the 6 orders, and then
// back to spacer one at a time in a random order. After every step the
// outputs are compared with the early output rule worked out here:
//   sum  is data only once all three inputs are data; on the way back it
//        stays data until the carry in and one operand are spacer, since its
//        C-elements hold while only one of their inputs has dropped
//   cout is data as soon as a and b are data and equal (generate/kill), or
//        once all three are data; it is spacer once a or b is spacer.
// No output may ever show the illegal 11 code. Early set (cout before cin)
// and early reset (cout spacer while cin still data) are counted and must
// both happen.
`timescale 1ns/1ps
module tb_eo_fa;
  import qdi_pkg::*;
  dr_t a, b, cin, sum, cout;
  int  checks = 0, failures = 0;
  int  n_early_set = 0, n_early_reset = 0;

  eo_fa dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input string what, input dr_t got, input dr_t exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: a=%b b=%b cin=%b got %b expected %b", what, a, b, cin, got, exp);
    end
  endtask

  // Expected outputs for the present inputs; sum_was_data tells whether the sum
  // was data before the present step (C-element hold on the way down).
  task automatic check_all(input logic [2:0] v, input logic sum_was_data);
    logic all_d, ab_d;
    dr_t  es, ec;
    logic s, c;
    s = v[0] ^ v[1] ^ v[2];
    c = (v[0] & v[1]) | (v[2] & (v[0] ^ v[1]));
    all_d = dr_is_data(a) && dr_is_data(b) && dr_is_data(cin);
    ab_d  = dr_is_data(a) && dr_is_data(b);
    es = (all_d || (sum_was_data && (ab_d || dr_is_data(cin)))) ? dr_enc(s) : '0;
    ec = (all_d || (ab_d && v[0] == v[1])) ? dr_enc(c) : '0;
    check("sum", sum, es);
    check("cout", cout, ec);
    if (dr_is_data(cout) && !dr_is_data(cin)) n_early_set++;
    if (!dr_is_data(cout) && dr_is_data(cin)) n_early_reset++;
  endtask

  initial begin
    int orders[6][3] = '{'{0,1,2}, '{0,2,1}, '{1,0,2}, '{1,2,0}, '{2,0,1}, '{2,1,0}};
    a = '0; b = '0; cin = '0;
    #1;
    for (int v = 0; v < 8; v++) begin
      for (int o = 0; o < 6; o++) begin
        // data phase, one input at a time
        for (int k = 0; k < 3; k++) begin
          case (orders[o][k])
            0: a   = dr_enc(v[0]);
            1: b   = dr_enc(v[1]);
            default: cin = dr_enc(v[2]);
          endcase
          #1;
          check_all(3'(v), 1'b0);
        end
        // spacer phase, random order
        begin
          int first = $urandom_range(2);
          for (int k = 0; k < 3; k++) begin
            case ((first + k) % 3)
              0: a   = '0;
              1: b   = '0;
              default: cin = '0;
            endcase
            #1;
            check_all(3'(v), 1'b1);
          end
        end
      end
    end
    checks++;
    if (n_early_set == 0 || n_early_reset == 0) begin
      failures++;
      $display("FAIL early set (%0d) or early reset (%0d) never seen", n_early_set, n_early_reset);
    end
    $display("early_set=%0d early_reset=%0d", n_early_set, n_early_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
