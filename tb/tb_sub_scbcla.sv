// tb_sub_scbcla: self-checking test of one 4-bit sub-SCBCLA section.
//
// All 512 values of (a, b, cin) are applied as data and then as spacer. The
// section's two carry inputs are driven with the same value, as in the least
// significant section. With data the sums must encode a + b + cin and both
// carry outputs its bit 4; with spacer every output must be spacer. A second
// pass drives the two carry inputs in sequence (lookahead input first) and
// checks that the section carry is complete before the ripple carry input
// has arrived whenever the section does not fully propagate.
`timescale 1ns/1ps
module tb_sub_scbcla;
  import qdi_pkg::*;
  dr_t [3:0] a, b, sum;
  dr_t       cin_lcg, cin_rca, cout, cout_alias;
  int checks = 0, failures = 0, n_carry_before_ripple = 0;

  sub_scbcla #(.ALIAS(1'b1)) dut (
    .a(a), .b(b), .cin_lcg(cin_lcg), .cin_rca(cin_rca),
    .sum(sum), .cout(cout), .cout_alias(cout_alias)
  );

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic dr_t [3:0] enc4(input logic [3:0] v);
    dr_t [3:0] d;
    for (int i = 0; i < 4; i++) d[i] = dr_enc(v[i]);
    return d;
  endfunction

  initial begin
    a = '0; b = '0; cin_lcg = '0; cin_rca = '0;
    #1;
    for (int pass = 0; pass < 2; pass++) begin
      for (int v = 0; v < 512; v++) begin
        logic [3:0] va, vb;
        logic       vc;
        logic [4:0] r;
        va = v[3:0]; vb = v[7:4]; vc = v[8];
        r  = va + vb + 4'(vc);
        a = enc4(va); b = enc4(vb);
        cin_lcg = dr_enc(vc);
        if (pass == 0) cin_rca = dr_enc(vc);
        #1;
        if (pass == 1) begin
          checks++;
          if (cout !== dr_enc(r[4]) || cout_alias !== dr_enc(r[4]) || sum[0] !== '0) begin
            failures++;
            $display("FAIL section carry before ripple input a=%h b=%h c=%b cout=%b", va, vb, vc, cout);
          end else n_carry_before_ripple++;
          cin_rca = dr_enc(vc);
          #1;
        end
        checks++;
        if (sum !== enc4(r[3:0]) || cout !== dr_enc(r[4]) || cout_alias !== dr_enc(r[4])) begin
          failures++;
          $display("FAIL a=%h b=%h cin=%b sum=%b cout=%b alias=%b expected %h",
                   va, vb, vc, sum, cout, cout_alias, r);
        end
        a = '0; b = '0; cin_lcg = '0; cin_rca = '0;
        #1;
        checks++;
        if (sum !== '0 || cout !== '0 || cout_alias !== '0) begin
          failures++;
          $display("FAIL spacer a=%h b=%h sum=%b cout=%b", va, vb, sum, cout);
        end
      end
    end
    checks++;
    if (n_carry_before_ripple == 0) begin
      failures++;
      $display("FAIL lookahead-before-ripple never seen");
    end
    $display("carry_before_ripple=%0d", n_carry_before_ripple);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
