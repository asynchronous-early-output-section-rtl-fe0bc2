// tb_scbcla: self-checking test of the 32-bit early output SCBCLA.
//
// Four adders run side by side on the same inputs: the default build (alias
// carry logic, no ripple nibble) and the three other builds the parameters
// give (without alias logic; hybrid with a 4-bit ripple carry adder in the
// least significant nibble, with and without alias logic).
//
// Each addition presents the 65 dual-rail inputs (a, b, carry in) one at a
// time in a random order, then removes them one at a time in a random order,
// as wires with unequal delays would. After every single step the testbench
// checks that no output shows the illegal 11 code and that outputs only rise
// while data arrives and only fall while the spacer arrives (monotonic
// transitions). Once all data has arrived every output must encode
// a + b + cin, computed here with a plain integer addition; once all spacer
// has arrived every output must be spacer.
//
// The vectors are 1000 random additions plus directed ones: all bits
// propagate (a = ~b, worst-case carry path) with each carry-in value, and
// carry-in first on the way back so that the alias carry drops ahead of the
// C-element carry. Counted, and each required at least once:
//   early_set         carry out complete before all inputs have arrived
//   early_reset       every output spacer before all inputs are spacer
//   alias_early_reset alias carry spacer while the C-element carry holds
`timescale 1ns/1ps
module tb_scbcla;
  import qdi_pkg::*;
  localparam int N    = 32;
  localparam int NIN  = 2 * N + 1;
  localparam int NV   = 4;          // number of adder builds under test
  localparam int NRND = 1000;

  dr_t [N-1:0] a, b;
  dr_t         cin;
  dr_t [N-1:0] sum_v   [NV];
  dr_t         cout_v  [NV];
  dr_t         alias_v [NV];

  int checks = 0, failures = 0;
  int n_early_set = 0, n_early_reset = 0, n_alias_early_reset = 0;

  // Default build: the 32-bit SCBCLA with alias carry logic.
  scbcla dut_alias (.a(a), .b(b), .cin(cin), .sum(sum_v[0]), .cout(cout_v[0]), .cout_alias(alias_v[0]));
  scbcla #(.N(N), .ALIAS(1'b0), .HYBRID(1'b0)) dut_plain (
    .a(a), .b(b), .cin(cin), .sum(sum_v[1]), .cout(cout_v[1]), .cout_alias(alias_v[1]));
  scbcla #(.N(N), .ALIAS(1'b1), .HYBRID(1'b1)) dut_hyb_alias (
    .a(a), .b(b), .cin(cin), .sum(sum_v[2]), .cout(cout_v[2]), .cout_alias(alias_v[2]));
  scbcla #(.N(N), .ALIAS(1'b0), .HYBRID(1'b1)) dut_hyb_plain (
    .a(a), .b(b), .cin(cin), .sum(sum_v[3]), .cout(cout_v[3]), .cout_alias(alias_v[3]));

  initial begin
    #10000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // All outputs of one build, flattened: N sums, cout, alias carry.
  function automatic logic [2*(N+2)-1:0] outs(input int k);
    return {alias_v[k], cout_v[k], sum_v[k]};
  endfunction

  logic [2*(N+2)-1:0] prev [NV];

  // Drive input number idx (0..N-1 a, N..2N-1 b, 2N cin) with d.
  task automatic drive(input int idx, input dr_t d);
    if (idx < N) a[idx] = d;
    else if (idx < 2 * N) b[idx - N] = d;
    else cin = d;
  endtask

  function automatic logic all_inputs(input logic want_data);
    for (int i = 0; i < N; i++) begin
      if (dr_is_data(a[i]) != want_data) return 1'b0;
      if (dr_is_data(b[i]) != want_data) return 1'b0;
    end
    return dr_is_data(cin) == want_data;
  endfunction

  // Checks after one input step. rising: data phase.
  task automatic step_check(input logic rising);
    for (int k = 0; k < NV; k++) begin
      logic [2*(N+2)-1:0] o;
      o = outs(k);
      checks++;
      for (int i = 0; i < N + 2; i++) begin
        if (o[2*i+1] && o[2*i]) begin
          failures++;
          $display("FAIL build %0d output %0d illegal 11", k, i);
          break;
        end
      end
      checks++;
      if (rising ? ((prev[k] & ~o) != '0) : ((o & ~prev[k]) != '0)) begin
        failures++;
        $display("FAIL build %0d non-monotonic %s transition", k, rising ? "falling" : "rising");
      end
      prev[k] = o;
    end
    if (rising && dr_is_data(cout_v[0]) && !all_inputs(1'b1)) n_early_set++;
    if (!rising && (outs(0) == '0) && !all_inputs(1'b0)) n_early_reset++;
    if (!rising && dr_is_spacer(alias_v[0]) && dr_is_data(cout_v[0])) n_alias_early_reset++;
  endtask

  task automatic shuffle(ref int ord[NIN]);
    for (int i = NIN - 1; i > 0; i--) begin
      int j, t;
      j = $urandom_range(i);
      t = ord[i]; ord[i] = ord[j]; ord[j] = t;
    end
  endtask

  task automatic add_once(input logic [N-1:0] va, input logic [N-1:0] vb, input logic vc,
                          input logic cin_first_down);
    int ord[NIN];
    logic [N:0] r;
    logic [2*(N+2)-1:0] exp_o;
    logic [NIN-1:0] vals;
    r = {1'b0, va} + {1'b0, vb} + (N+1)'(vc);
    vals = {vc, vb, va};
    for (int i = 0; i < NIN; i++) ord[i] = i;
    shuffle(ord);
    foreach (ord[i]) begin
      drive(ord[i], dr_enc(vals[ord[i]]));
      #1;
      step_check(1'b1);
    end
    for (int i = 0; i < N; i++) exp_o[2*i +: 2] = dr_enc(r[i]);
    exp_o[2*N +: 2]     = dr_enc(r[N]);
    exp_o[2*N + 2 +: 2] = dr_enc(r[N]);
    for (int k = 0; k < NV; k++) begin
      checks++;
      if (outs(k) !== exp_o) begin
        failures++;
        $display("FAIL build %0d a=%h b=%h cin=%b got sum/cout wrong (expected %h)", k, va, vb, vc, r);
      end
    end
    shuffle(ord);
    if (cin_first_down) begin
      drive(2 * N, '0);
      #1;
      step_check(1'b0);
    end
    foreach (ord[i]) begin
      if (cin_first_down && ord[i] == 2 * N) continue;
      drive(ord[i], '0);
      #1;
      step_check(1'b0);
    end
    for (int k = 0; k < NV; k++) begin
      checks++;
      if (outs(k) !== '0) begin
        failures++;
        $display("FAIL build %0d did not return to spacer", k);
      end
    end
  endtask

  initial begin
    logic [N-1:0] va;
    a = '0; b = '0; cin = '0;
    #1;
    for (int k = 0; k < NV; k++) prev[k] = outs(k);
    // Directed: full propagation, both carry-in values, both return orders.
    for (int t = 0; t < 8; t++) begin
      va = $urandom();
      add_once(va, ~va, t[0], t[1]);
    end
    add_once('0, '0, 1'b0, 1'b0);
    add_once('1, '1, 1'b1, 1'b0);
    add_once('1, '0, 1'b1, 1'b1);
    for (int t = 0; t < NRND; t++) begin
      add_once($urandom(), $urandom(), 1'($urandom_range(1)), 1'($urandom_range(1)));
    end
    checks++;
    if (n_early_set == 0 || n_early_reset == 0 || n_alias_early_reset == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("early_set=%0d early_reset=%0d alias_early_reset=%0d",
             n_early_set, n_early_reset, n_alias_early_reset);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
