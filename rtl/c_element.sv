// c_element: 2-input Muller C-element.
//
// The output goes to 1 when both inputs are 1, to 0 when both are 0, and keeps
// its previous value while the inputs differ. It is the state-holding gate of
// the QDI adder; the SCBCLG, the full adder and the sum-only logic all use it
// to wait for one signal before passing on another.
//
// Interface: inputs a, b; output y. Timing: no clock. The hold is written as a
// level-sensitive latch whose enable is (a == b) and whose data is a, which is
// the gate's exact next-state function (y+ = ab + y(a+b)). The behaviour
// follows the paper's definition; the paper's cell is a custom 12-transistor
// circuit, so the latch description is this design's own choice. The latch
// listed by synthesis is intended: it is the C-element's state.
module c_element (
  input  logic a,
  input  logic b,
  output logic y
);

  always_latch begin
    if (a == b) y = a;
  end

endmodule
