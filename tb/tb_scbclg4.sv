// tb_scbclg4: self-checking test of the 4-bit SCBCLG with alias carry.
//
// For all 512 values of (a, b, cin):
//  1. a and b arrive with the carry in still spacer. Unless all four bit
//     pairs propagate, both carry outputs must already show the section
//     carry (early set); if they all propagate both must stay spacer.
//  2. The carry in arrives: both outputs must equal bit 4 of a + b + cin.
//  3. The return to spacer runs in one of two orders, alternating:
//     carry in first: when all bits propagate the alias carry must drop at
//     once while the C-element carry holds until the operands drop too
//     (counted as alias early reset); otherwise both hold.
//     operands first: when all bits propagate the C-element carry holds
//     until the carry in drops; otherwise both drop at once.
//  4. At the end everything must be spacer.
`timescale 1ns/1ps
module tb_scbclg4;
  import qdi_pkg::*;
  dr_t [3:0] a, b;
  dr_t       cin, cout, cout_alias;
  int checks = 0, failures = 0;
  int n_early_set = 0, n_alias_early_reset = 0, n_propagate = 0;

  scbclg4 #(.ALIAS(1'b1)) dut (.a(a), .b(b), .cin(cin), .cout(cout), .cout_alias(cout_alias));

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

  task automatic expect2(input string what, input dr_t e_main, input dr_t e_alias);
    checks++;
    if (cout !== e_main || cout_alias !== e_alias) begin
      failures++;
      $display("FAIL %s: a=%b b=%b cin=%b cout=%b alias=%b expected %b %b",
               what, a, b, cin, cout, cout_alias, e_main, e_alias);
    end
  endtask

  initial begin
    a = '0; b = '0; cin = '0;
    #1;
    for (int v = 0; v < 512; v++) begin
      logic [3:0] va, vb;
      logic       vc, prop, carry;
      logic [4:0] r;
      dr_t        ec;
      va = v[3:0]; vb = v[7:4]; vc = v[8];
      r = va + vb + 4'(vc);
      carry = r[4];
      prop  = ((va ^ vb) == 4'hF);
      ec    = dr_enc(carry);
      if (prop) n_propagate++;

      a = enc4(va); b = enc4(vb);
      #1;
      if (prop) expect2("no early carry when all propagate", '0, '0);
      else begin
        expect2("early set", ec, ec);
        n_early_set++;
      end

      cin = dr_enc(vc);
      #1;
      expect2("carry", ec, ec);

      if (v % 2 == 0) begin
        cin = '0;
        #1;
        if (prop) begin
          expect2("alias early reset", ec, '0);
          n_alias_early_reset++;
        end else expect2("hold after cin drop", ec, ec);
        a = '0; b = '0;
        #1;
      end else begin
        a = '0; b = '0;
        #1;
        if (prop) expect2("C-element hold on cin", ec, '0);
        else expect2("early reset", '0, '0);
        cin = '0;
        #1;
      end
      expect2("spacer", '0, '0);
    end
    checks++;
    if (n_early_set == 0 || n_alias_early_reset == 0 || n_propagate == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("early_set=%0d alias_early_reset=%0d all_propagate=%0d",
             n_early_set, n_alias_early_reset, n_propagate);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
