// scbclg4: 4-bit section-carry based carry lookahead generator (SCBCLG), with
// the optional alias carry output.
//
// Unlike a conventional carry lookahead generator it produces one carry only,
// the carry out of its 4-bit section, from the four dual-rail operand pairs
// and the section's carry in. The logic is a disjoint sum of products split
// into three mutually exclusive cases that are known before the carry in:
//   gen  the section generates a carry (carry out = 1 whatever the carry in)
//   kill the section kills the carry   (carry out = 0 whatever the carry in)
//   N    all four bits propagate       (carry out = carry in)
// Bits 3 and 2 are decoded by AND-OR gates: a 3-term OR gives the generate
// and kill cases decided there, a 4-term OR (four 4-input ANDs) gives p32,
// "bits 3 and 2 both propagate". p32 then walks a tree of 2-input C-elements
// with A1 rails, B1 rails, A0 rails and B0 rails; each leaf of the tree is one
// case of bits 1 and 0 (generate, kill or propagate) and feeds the gen, kill
// or N OR gate. The carry out is
//   C41 = C(C01, N) + gen        C40 = C(C00, N) + kill
// With ALIAS=1 a second, logically equal carry pair is made by AO21 gates:
//   C41alias = C01.N + gen       C40alias = C00.N + kill
// It has one gate between carry in and carry out instead of a C-element plus
// an OR, so a carry crosses the section faster, and it also drops to spacer
// as soon as the carry in does. The C-element form (C41, C40) waits for N to
// drop and therefore acknowledges N; the alias pair alone would not, so both
// pairs are kept.
//
// Interface: dual-rail a[3:0], b[3:0], cin in; dual-rail cout and
// cout_alias out. With ALIAS=0 no alias gates exist and cout_alias carries
// the same wires as cout, so a chain of sections can be wired the same way in
// both versions. Timing: no clock. The gate network (terms, C-element tree,
// AO21 alias gates) follows the paper's SCBCLG figure; how the generate terms
// are grouped into OR gates beyond the printed 3-term group is this design's
// choice and does not change the function.
module scbclg4
  import qdi_pkg::*;
#(
  parameter bit ALIAS = 1'b1
) (
  input  dr_t [3:0] a,
  input  dr_t [3:0] b,
  input  dr_t       cin,
  output dr_t       cout,
  output dr_t       cout_alias
);

  // Bits 3 and 2 decoded directly.
  logic gen32, kill32, p32;
  always_comb begin
    gen32  = (a[3].r1 & b[3].r1)
           | (a[3].r0 & b[3].r1 & a[2].r1 & b[2].r1)
           | (a[3].r1 & b[3].r0 & a[2].r1 & b[2].r1);
    kill32 = (a[3].r0 & b[3].r0)
           | (a[3].r0 & b[3].r1 & a[2].r0 & b[2].r0)
           | (a[3].r1 & b[3].r0 & a[2].r0 & b[2].r0);
    p32    = (a[3].r0 & b[3].r1 & a[2].r0 & b[2].r1)
           | (a[3].r0 & b[3].r1 & a[2].r1 & b[2].r0)
           | (a[3].r1 & b[3].r0 & a[2].r0 & b[2].r1)
           | (a[3].r1 & b[3].r0 & a[2].r1 & b[2].r0);
  end

  // Bit 1: p32 with A1, then with B1.
  logic x1, x0;            // p32 & A1=1, p32 & A1=0
  logic g1, k1;            // p32 & generate / kill at bit 1
  logic p1a, p1b;          // p32 & propagate at bit 1 (A1=1,B1=0 / A1=0,B1=1)
  c_element u_x1  (.a(p32), .b(a[1].r1), .y(x1));
  c_element u_x0  (.a(p32), .b(a[1].r0), .y(x0));
  c_element u_g1  (.a(x1),  .b(b[1].r1), .y(g1));
  c_element u_p1a (.a(x1),  .b(b[1].r0), .y(p1a));
  c_element u_p1b (.a(x0),  .b(b[1].r1), .y(p1b));
  c_element u_k1  (.a(x0),  .b(b[1].r0), .y(k1));

  // Bit 0: each bit-1 propagate branch with A0, then with B0.
  logic ya1, ya0, yb1, yb0;
  logic g0a, n0a, n0b, k0a, g0b, n0c, n0d, k0b;
  c_element u_ya1 (.a(p1a), .b(a[0].r1), .y(ya1));
  c_element u_ya0 (.a(p1a), .b(a[0].r0), .y(ya0));
  c_element u_g0a (.a(ya1), .b(b[0].r1), .y(g0a));
  c_element u_n0a (.a(ya1), .b(b[0].r0), .y(n0a));
  c_element u_n0b (.a(ya0), .b(b[0].r1), .y(n0b));
  c_element u_k0a (.a(ya0), .b(b[0].r0), .y(k0a));
  c_element u_yb1 (.a(p1b), .b(a[0].r1), .y(yb1));
  c_element u_yb0 (.a(p1b), .b(a[0].r0), .y(yb0));
  c_element u_g0b (.a(yb1), .b(b[0].r1), .y(g0b));
  c_element u_n0c (.a(yb1), .b(b[0].r0), .y(n0c));
  c_element u_n0d (.a(yb0), .b(b[0].r1), .y(n0d));
  c_element u_k0b (.a(yb0), .b(b[0].r0), .y(k0b));

  logic gen, kill, n_all;
  always_comb begin
    gen   = gen32 | g1 | g0a | g0b;
    kill  = kill32 | k1 | k0a | k0b;
    n_all = n0a | n0b | n0c | n0d;      // node N: all four bits propagate
  end

  // Carry out through a C-element and an OR gate per rail.
  logic cn1, cn0;
  c_element u_cn1 (.a(cin.r1), .b(n_all), .y(cn1));
  c_element u_cn0 (.a(cin.r0), .b(n_all), .y(cn0));

  always_comb begin
    cout.r1 = cn1 | gen;
    cout.r0 = cn0 | kill;
  end

  // Alias carry out through one AO21 gate per rail.
  if (ALIAS) begin : g_alias
    always_comb begin
      cout_alias.r1 = (cin.r1 & n_all) | gen;
      cout_alias.r0 = (cin.r0 & n_all) | kill;
    end
  end else begin : g_no_alias
    assign cout_alias = cout;
  end

endmodule
