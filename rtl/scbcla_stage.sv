// scbcla_stage: the 32-bit early output SCBCLA with alias carry logic in a
// complete QDI pipeline stage with 4-phase return-to-zero handshaking.
//
// The sender's dual-rail operands and carry in enter an input register; a
// completion detector on the register's outputs tells the sender, through
// ack_to_sender, when the register holds complete data (ask for spacer) or
// complete spacer (ask for data). The register feeds the adder; the adder's
// sum and carry out enter an output register whose completion detector drives
// the input register's ACKIN, so the input register keeps its data until the
// result has been captured and keeps its spacer until the result has been
// taken away. The input register's ACKIN is a C-element of that request and
// the input completion detector's own output, so the register also waits
// until its own bits have all changed phase (see below). ack_from_receiver is the output register's ACKIN from the next
// stage.
//
// Sequence per addition: sender applies data while ack_to_sender=1; the
// input register captures it and ack_to_sender falls; the sum is computed and
// captured; the sender then applies the spacer, the receiver lowers
// ack_from_receiver once it has read the sum, the stage returns to spacer and
// ack_to_sender rises again.
//
// Interface: rst (active high); dual-rail a, b (N bits), cin; ack_to_sender;
// dual-rail sum (N bits), cout; cout_alias, the top section's alias carry
// taken straight from the adder; ack_from_receiver. Timing: no clock.
// ACK polarity: 1 = request for data, 0 = request for spacer. The stage
// arrangement is the paper's; the polarity, the reset and the C-element on
// the input register's ACKIN are this design's.
// The handshake closes a loop through the registers, the adder and the output
// completion detector; a linter reports it as circular logic. The loop is the
// asynchronous control itself and every path around it passes a C-element, so
// it stands.
module scbcla_stage
  import qdi_pkg::*;
#(
  parameter int unsigned N      = 32,
  parameter bit          ALIAS  = 1'b1,
  parameter bit          HYBRID = 1'b0
) (
  input  logic         rst,
  input  dr_t  [N-1:0] a,
  input  dr_t  [N-1:0] b,
  input  dr_t          cin,
  output logic         ack_to_sender,
  output dr_t  [N-1:0] sum,
  output dr_t          cout,
  output dr_t          cout_alias,
  input  logic         ack_from_receiver
);

  localparam int unsigned WI = 2 * N + 1;   // input register width
  localparam int unsigned WO = N + 1;       // output register width

  dr_t [WI-1:0] in_d, in_q;
  dr_t [WO-1:0] out_d, out_q;
  logic         out_ack;     // ACKOUT of the output completion detector
  logic         in_ack;      // ACKIN of the input register

  assign in_d = {cin, b, a};

  dr_register #(.W(WI)) u_in_reg (
    .rst(rst), .d(in_d), .ackin(in_ack), .q(in_q)
  );

  completion_detector #(.W(WI)) u_in_cd (
    .d(in_q), .ackout(ack_to_sender)
  );

  // The input register changes phase only when the next stage asks for it
  // and its own contents are complete in the present phase. The adder is of
  // the early output type: its outputs can return to spacer while some of
  // its inputs still hold data, so the next stage's request alone could let
  // the register accept data again before every bit has been cleared.
  c_element u_in_ack (.a(out_ack), .b(ack_to_sender), .y(in_ack));

  dr_t [N-1:0] add_sum;
  dr_t         add_cout;

  scbcla #(.N(N), .ALIAS(ALIAS), .HYBRID(HYBRID)) u_adder (
    .a(in_q[N-1:0]), .b(in_q[2*N-1:N]), .cin(in_q[2*N]),
    .sum(add_sum), .cout(add_cout), .cout_alias(cout_alias)
  );

  assign out_d = {add_cout, add_sum};

  dr_register #(.W(WO)) u_out_reg (
    .rst(rst), .d(out_d), .ackin(ack_from_receiver), .q(out_q)
  );

  completion_detector #(.W(WO)) u_out_cd (
    .d(out_q), .ackout(out_ack)
  );

  assign sum  = out_q[N-1:0];
  assign cout = out_q[N];

endmodule
