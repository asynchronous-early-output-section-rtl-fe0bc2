// qdi_pkg: shared types and helpers for the dual-rail quasi-delay-insensitive
// (QDI) adder.
//
// Every logical bit X travels on two wires, X1 (true rail) and X0 (false
// rail). X=1 is {X1,X0}=10, X=0 is 01, the spacer (no data) is 00 and 11 is
// illegal. Data and spacer alternate on the wires (4-phase return-to-zero
// protocol). The struct dr_t bundles the two rails of one bit; the helper
// functions encode, decode and classify such bundles. Nothing here holds state.
package qdi_pkg;

  // One dual-rail bit: r1 is the "1" rail, r0 the "0" rail.
  typedef struct packed {
    logic r1;
    logic r0;
  } dr_t;


  // Encode a single-rail bit as valid dual-rail data.
  function automatic dr_t dr_enc(input logic b);
    dr_t d;
    d.r1 = b;
    d.r0 = ~b;
    return d;
  endfunction

  // True when the pair carries data (exactly one rail high).
  function automatic logic dr_is_data(input dr_t d);
    return d.r1 ^ d.r0;
  endfunction

  // True when the pair is the spacer.
  function automatic logic dr_is_spacer(input dr_t d);
    return ~(d.r1 | d.r0);
  endfunction

  // True when the pair is the illegal 11 code.
  function automatic logic dr_is_illegal(input dr_t d);
    return d.r1 & d.r0;
  endfunction

endpackage
