// dr_register: W-bit dual-rail QDI stage register.
//
// Each rail of each bit is a 2-input C-element of the incoming rail and the
// register's ACKIN. While ACKIN is 1 ("request for data") a rail can only
// rise, so arriving data passes bit by bit and is then held; while ACKIN is
// 0 ("request for spacer") a rail can only fall, so the held data stays until
// the spacer arrives. This is the 4-phase return-to-zero register placed in
// front of and behind the adder.
//
// Interface: rst (active high, clears every rail to spacer), dual-rail d in,
// ackin in, dual-rail q out. Timing: no clock. The register's role and its
// ACKIN come from the paper's stage diagram; the C-element form, the ACKIN
// polarity (1 = ready for data) and the reset are this design's choices. The
// latches listed by synthesis are intended: they are the C-elements' state.
module dr_register
  import qdi_pkg::*;
#(
  parameter int unsigned W = 65
) (
  input  logic         rst,
  input  dr_t  [W-1:0] d,
  input  logic         ackin,
  output dr_t  [W-1:0] q
);

  logic [W-1:0] q1, q0;   // state of the true and false rail C-elements

  for (genvar i = 0; i < W; i++) begin : g_bit
    always_latch begin
      if (rst)                   q1[i] = 1'b0;
      else if (d[i].r1 == ackin) q1[i] = ackin;
    end
    always_latch begin
      if (rst)                   q0[i] = 1'b0;
      else if (d[i].r0 == ackin) q0[i] = ackin;
    end
    assign q[i] = '{r1: q1[i], r0: q0[i]};
  end

endmodule
