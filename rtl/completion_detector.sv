// completion_detector: completion detector for a W-bit dual-rail bundle.
//
// One OR gate per bit tells whether that bit holds data (either rail high).
// A W-input C-element over those OR outputs (the function of a tree of
// 2-input C-elements) rises when every bit holds data and falls only when
// every bit has returned to spacer, so it never reports a half-arrived
// bundle. Its inverted output is the stage's ACKOUT: 0 asks the sender for
// the spacer, 1 asks it for the next data.
//
// Interface: dual-rail d[W-1:0] in; ackout out (0 once the bundle is complete
// data, 1 once it is complete spacer). Timing: no clock; the output holds
// between the two complete states. The detector's place and its ACKOUT follow
// the paper's stage diagram; the OR plus multi-input C-element form and the
// ACKOUT polarity are this design's choices. The latch listed by synthesis is
// intended: it is the C-element's state. Inside the adder stage a linter
// reports this output as part of circular logic: it is, since the stage's
// handshake is a loop through C-elements (see scbcla_stage). A deferred
// assertion flags any bit that shows the illegal 11 code.
module completion_detector
  import qdi_pkg::*;
#(
  parameter int unsigned W = 65
) (
  input  dr_t  [W-1:0] d,
  output logic         ackout
);

  logic [W-1:0] bit_valid;
  logic         done;      // 1 = complete data, 0 = complete spacer

  always_comb begin
    for (int i = 0; i < W; i++) bit_valid[i] = d[i].r1 | d[i].r0;
  end

  // W-input C-element, the function of a tree of 2-input C-elements.
  always_latch begin
    if (&bit_valid)       done = 1'b1;
    else if (~|bit_valid) done = 1'b0;
  end

  assign ackout = ~done;

  // Dual-rail rule: no bit of the monitored bundle may show the illegal 11
  // code once the signals have settled.
  always_comb begin
    for (int i = 0; i < W; i++) begin
      assert final (!(d[i].r1 && d[i].r0))
        else $error("completion_detector: bit %0d holds the illegal 11 code", i);
    end
  end

endmodule
