// eo_sol: early output dual-rail sum-only logic.
//
// The same sum network as the early output full adder without the carry-out
// gates; it sits in the most significant bit of each 4-bit section, whose
// carry out comes from the section's lookahead generator instead.
//   eq = A0.B0 + A1.B1, df = A0.B1 + A1.B0
//   SUM1 = C(eq,CIN1) + C(df,CIN0)      SUM0 = C(eq,CIN0) + C(df,CIN1)
//
// Interface: dual-rail a, b, cin in; dual-rail sum out. Timing: no clock; one
// AND-OR, one C-element and one OR from input to output. The network follows
// the paper's sum-only logic figure.
module eo_sol
  import qdi_pkg::*;
(
  input  dr_t a,
  input  dr_t b,
  input  dr_t cin,
  output dr_t sum
);

  logic eq, df;
  logic eq_c1, eq_c0, df_c1, df_c0;

  always_comb begin
    eq = (a.r0 & b.r0) | (a.r1 & b.r1);
    df = (a.r0 & b.r1) | (a.r1 & b.r0);
  end

  c_element u_eq_c1 (.a(eq), .b(cin.r1), .y(eq_c1));
  c_element u_eq_c0 (.a(eq), .b(cin.r0), .y(eq_c0));
  c_element u_df_c1 (.a(df), .b(cin.r1), .y(df_c1));
  c_element u_df_c0 (.a(df), .b(cin.r0), .y(df_c0));

  always_comb begin
    sum.r1 = eq_c1 | df_c0;
    sum.r0 = eq_c0 | df_c1;
  end

endmodule
