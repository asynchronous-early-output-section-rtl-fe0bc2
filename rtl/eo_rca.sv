// eo_rca: early output dual-rail ripple carry adder.
//
// W early output full adders in a chain, the carry out of each feeding the
// carry in of the next. In the hybrid SCBCLA-RCA it replaces the least
// significant sub-SCBCLA: its critical path is only the chain of AO22 carry
// gates, shorter than the lookahead generator's AND/OR/C-element path.
//
// Interface: dual-rail a[W-1:0], b[W-1:0], cin in; dual-rail sum[W-1:0] and
// cout out. Timing: no clock. W=4 is the size the paper uses.
module eo_rca
  import qdi_pkg::*;
#(
  parameter int unsigned W = 4
) (
  input  dr_t [W-1:0] a,
  input  dr_t [W-1:0] b,
  input  dr_t         cin,
  output dr_t [W-1:0] sum,
  output dr_t         cout
);

  dr_t [W:0] c;
  assign c[0] = cin;

  for (genvar i = 0; i < W; i++) begin : g_bit
    eo_fa u_fa (.a(a[i]), .b(b[i]), .cin(c[i]), .sum(sum[i]), .cout(c[i+1]));
  end

  assign cout = c[W];

endmodule
