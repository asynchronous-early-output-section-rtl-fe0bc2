// scbcla: N-bit asynchronous early output section-carry based carry lookahead
// adder (SCBCLA), dual-rail, with or without alias carry logic and optionally
// with a ripple carry adder in the least significant nibble.
//
// The N-bit addition is cut into N/4 sections of 4 bits. Each section
// (sub_scbcla) ripples its carry internally to form its sums while its SCBCLG
// computes the section carry out by lookahead and hands it to the next
// section. With ALIAS=1 each SCBCLG also produces the alias carry; section j
// then takes the alias carry of section j-1 into its SCBCLG and the
// C-element carry of section j-1 into its full-adder chain, so carries jump
// from section to section through one AO21 gate each. With ALIAS=0 both
// inputs of a section come from the same carry. With HYBRID=1 the least
// significant section is replaced by a 4-bit early output ripple carry adder
// whose carry out feeds both carry inputs of section 1.
//
// Interface: dual-rail a[N-1:0], b[N-1:0], cin in; dual-rail sum[N-1:0], cout
// (C-element carry of the top section) and cout_alias (alias carry of the top
// section, equal to cout when ALIAS=0) out. Timing: no clock; outputs are
// complete data some gate delays after the inputs, and return to spacer after
// the inputs do (early output: some outputs may set or reset before all
// inputs have arrived). Defaults N=32, ALIAS=1, HYBRID=0 are the paper's
// main 32-bit adder with alias logic; HYBRID=1 gives its SCBCLA-RCA hybrid.
module scbcla
  import qdi_pkg::*;
#(
  parameter int unsigned N      = 32,
  parameter bit          ALIAS  = 1'b1,
  parameter bit          HYBRID = 1'b0
) (
  input  dr_t [N-1:0] a,
  input  dr_t [N-1:0] b,
  input  dr_t         cin,
  output dr_t [N-1:0] sum,
  output dr_t         cout,
  output dr_t         cout_alias
);

  localparam int unsigned M = 4;        // section size (SCBCLG width)
  localparam int unsigned K = N / M;    // number of sections

  if (N % M != 0 || N < M) begin : g_bad_n
    $error("scbcla: N must be a positive multiple of 4");
  end
  if (HYBRID && K < 2) begin : g_bad_hybrid
    $error("scbcla: HYBRID needs at least two sections");
  end

  dr_t [K-1:0] c_sec;     // C-element carry out of each section
  dr_t [K-1:0] c_alias;   // alias carry out of each section

  for (genvar j = 0; j < K; j++) begin : g_sec
    if (j == 0 && HYBRID) begin : g_rca
      eo_rca #(.W(M)) u_rca (
        .a(a[M-1:0]), .b(b[M-1:0]), .cin(cin),
        .sum(sum[M-1:0]), .cout(c_sec[0])
      );
      assign c_alias[0] = c_sec[0];
    end else begin : g_cla
      dr_t cin_lcg, cin_rca;
      if (j == 0) begin : g_first
        assign cin_lcg = cin;
        assign cin_rca = cin;
      end else begin : g_next
        assign cin_lcg = c_alias[j-1];
        assign cin_rca = c_sec[j-1];
      end
      sub_scbcla #(.ALIAS(ALIAS)) u_sec (
        .a(a[j*M +: M]), .b(b[j*M +: M]),
        .cin_lcg(cin_lcg), .cin_rca(cin_rca),
        .sum(sum[j*M +: M]),
        .cout(c_sec[j]), .cout_alias(c_alias[j])
      );
    end
  end

  assign cout       = c_sec[K-1];
  assign cout_alias = c_alias[K-1];

endmodule
