// tb_eo_rca: self-checking test of the 4-bit early output ripple carry adder.
//
// All 512 values of (a, b, cin) are applied as complete dual-rail data, each
// followed by a complete spacer. With data the outputs must encode
// a + b + cin (4 sum bits and the carry out); with spacer every output must
// be spacer. An extra pass presents the operands first and the carry in last:
// the carry out must already be data whenever the top bit pair generates or
// kills (early set), and it is counted.
`timescale 1ns/1ps
module tb_eo_rca;
  import qdi_pkg::*;
  localparam int W = 4;
  dr_t [W-1:0] a, b, sum;
  dr_t         cin, cout;
  int checks = 0, failures = 0, n_early_set = 0;

  eo_rca #(.W(W)) dut (.a(a), .b(b), .cin(cin), .sum(sum), .cout(cout));

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic dr_t [W-1:0] enc(input logic [W-1:0] v);
    dr_t [W-1:0] d;
    for (int i = 0; i < W; i++) d[i] = dr_enc(v[i]);
    return d;
  endfunction

  initial begin
    a = '0; b = '0; cin = '0;
    #1;
    for (int v = 0; v < 512; v++) begin
      logic [W-1:0] va, vb;
      logic         vc;
      logic [W:0]   r;
      va = v[3:0]; vb = v[7:4]; vc = v[8];
      r  = va + vb + W'(vc);
      a = enc(va); b = enc(vb);
      #1;
      if (va[W-1] == vb[W-1]) begin
        checks++;
        if (cout !== dr_enc(va[W-1])) begin
          failures++;
          $display("FAIL early carry a=%h b=%h cout=%b", va, vb, cout);
        end else n_early_set++;
      end
      cin = dr_enc(vc);
      #1;
      checks++;
      if (sum !== enc(r[W-1:0]) || cout !== dr_enc(r[W])) begin
        failures++;
        $display("FAIL a=%h b=%h cin=%b sum=%b cout=%b expected %h", va, vb, vc, sum, cout, r);
      end
      a = '0; b = '0; cin = '0;
      #1;
      checks++;
      if (sum !== '0 || cout !== '0) begin
        failures++;
        $display("FAIL spacer not propagated sum=%b cout=%b", sum, cout);
      end
    end
    checks++;
    if (n_early_set == 0) begin
      failures++;
      $display("FAIL early set never seen");
    end
    $display("early_set=%0d", n_early_set);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
