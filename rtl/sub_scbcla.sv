// sub_scbcla: one 4-bit section (sub-SCBCLA) of the section-carry based carry
// lookahead adder.
//
// The section holds a 4-bit SCBCLG, which computes the section's carry out by
// lookahead, and a ripple chain of three early output full adders (bits 0-2)
// and one early output sum-only logic (bit 3), which computes the four sum
// bits. The ripple chain needs no carry out of its own because the SCBCLG
// supplies it; the intra-section ripple and the inter-section lookahead run
// at the same time.
//
// The section takes two dual-rail carry inputs: cin_lcg feeds the SCBCLG and
// cin_rca feeds the full-adder chain. In the adder with alias logic the
// previous section's alias carry drives cin_lcg (the fast lookahead path) and
// its C-element carry drives cin_rca; in the least significant section, and
// everywhere in the adder without alias logic, both come from the same pair.
//
// Interface: dual-rail a[3:0], b[3:0], cin_lcg, cin_rca in; dual-rail
// sum[3:0], cout, cout_alias out. Timing: no clock. The composition and the
// internal carry names (y0..y2 in the paper's figures) follow the paper.
module sub_scbcla
  import qdi_pkg::*;
#(
  parameter bit ALIAS = 1'b1
) (
  input  dr_t [3:0] a,
  input  dr_t [3:0] b,
  input  dr_t       cin_lcg,
  input  dr_t       cin_rca,
  output dr_t [3:0] sum,
  output dr_t       cout,
  output dr_t       cout_alias
);

  dr_t [2:0] y;   // ripple carries inside the section

  scbclg4 #(.ALIAS(ALIAS)) u_lcg (
    .a(a), .b(b), .cin(cin_lcg), .cout(cout), .cout_alias(cout_alias)
  );

  eo_fa  u_fa0 (.a(a[0]), .b(b[0]), .cin(cin_rca), .sum(sum[0]), .cout(y[0]));
  eo_fa  u_fa1 (.a(a[1]), .b(b[1]), .cin(y[0]),    .sum(sum[1]), .cout(y[1]));
  eo_fa  u_fa2 (.a(a[2]), .b(b[2]), .cin(y[1]),    .sum(sum[2]), .cout(y[2]));
  eo_sol u_sol (.a(a[3]), .b(b[3]), .cin(y[2]),    .sum(sum[3]));

endmodule
