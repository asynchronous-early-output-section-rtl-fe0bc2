// eo_fa: early output dual-rail full adder.
//
// Two AND-OR terms classify the operand pair: eq = A0.B0 + A1.B1 (the bits are
// equal, so the sum equals the carry in) and df = A0.B1 + A1.B0 (the bits
// differ, so the sum is the inverted carry in). Four C-elements pair eq and df
// with the two carry-in rails and two OR gates form the sum rails:
//   SUM1 = C(eq,CIN1) + C(df,CIN0)      SUM0 = C(eq,CIN0) + C(df,CIN1)
// The carry out is one AND-OR (AO22) per rail:
//   COUT1 = CIN1.df + A1.B1             COUT0 = CIN0.df + A0.B0
// so a generate (11) or kill (00) operand pair sets the carry out before the
// carry in arrives (early set), and the carry out drops to spacer as soon as
// the operands do (early reset).
//
// Interface: dual-rail a, b, cin in; dual-rail sum, cout out. Timing: no
// clock; outputs follow the inputs through at most one C-element and one OR.
// The gate network is the one drawn for the paper's early output full adder;
// only the coding style is this design's.
module eo_fa
  import qdi_pkg::*;
(
  input  dr_t a,
  input  dr_t b,
  input  dr_t cin,
  output dr_t sum,
  output dr_t cout
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
    sum.r1  = eq_c1 | df_c0;
    sum.r0  = eq_c0 | df_c1;
    cout.r1 = (cin.r1 & df) | (a.r1 & b.r1);
    cout.r0 = (cin.r0 & df) | (a.r0 & b.r0);
  end

endmodule
