// tb_scbcla_stage: end-to-end test of the QDI adder stage at full size.
//
// The stage is built with its default parameters: 32-bit early output SCBCLA
// with alias carry logic between an input and an output dual-rail register.
// A sender and a receiver process run the 4-phase return-to-zero handshake
// on the two sides, as in the paper's evaluation: about 1000 random
// additions (here 1000 random plus a few directed all-propagate ones), a new
// input vector no sooner than 20 ns after the previous one.
//
// Sender: waits for ack_to_sender = 1, applies the 65 dual-rail inputs one at
// a time in a random order (1 ns apart), waits for ack_to_sender = 0, then
// removes them in a random order. Receiver: waits until the sum and carry
// out are complete data, compares them with a + b + cin computed from the
// sender's queue, waits a random time (0-20 ns, one time in ten 150 ns),
// lowers ack_from_receiver, waits for
// the outputs to return to spacer, waits again and raises it.
//
// Also checked: ack_to_sender falls only when the input register holds the
// complete input; the outputs never show the illegal 11 code. Counted, each
// required at least once:
//   transfers       completed additions
//   sender_stalls   the complete input was not taken at once, because the
//                   previous result still waited in the output register
//   early_set       adder carry out complete before all adder inputs
//   early_reset     adder outputs all spacer before all adder inputs
//   alias_early     alias carry spacer while the C-element carry is data
//   out_hold        output register holding a result after the adder
//                   itself has returned to spacer (slow receiver)
`timescale 1ns/1ps
module tb_scbcla_stage;
  import qdi_pkg::*;
  localparam int N    = 32;
  localparam int NIN  = 2 * N + 1;
  localparam int NRND = 1000;
  localparam int NDIR = 4;
  localparam int NTOT = NRND + NDIR;

  logic        rst, ack_to_sender, ack_from_receiver;
  dr_t [N-1:0] a, b, sum;
  dr_t         cin, cout, cout_alias;

  int checks = 0, failures = 0;
  int n_transfers = 0, n_sender_stalls = 0, n_early_set = 0, n_early_reset = 0;
  int n_alias_early = 0, n_out_hold = 0;

  scbcla_stage dut (
    .rst(rst), .a(a), .b(b), .cin(cin), .ack_to_sender(ack_to_sender),
    .sum(sum), .cout(cout), .cout_alias(cout_alias),
    .ack_from_receiver(ack_from_receiver)
  );

  logic [N:0] expected [$];

  initial begin
    #600000;
    $display("watchdog expired after %0d transfers", n_transfers);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic bundle_is(input dr_t [N-1:0] x, input logic want_data);
    for (int i = 0; i < N; i++) if (dr_is_data(x[i]) != want_data) return 1'b0;
    return 1'b1;
  endfunction

  // Monitor of the adder inside the stage, sampled every 0.5 ns.
  initial begin
    forever begin
      #0.5;
      if (!rst) begin
        logic in_all_data, in_all_spacer;
        in_all_data   = bundle_is(dut.u_adder.a, 1'b1) && bundle_is(dut.u_adder.b, 1'b1)
                        && dr_is_data(dut.u_adder.cin);
        in_all_spacer = bundle_is(dut.u_adder.a, 1'b0) && bundle_is(dut.u_adder.b, 1'b0)
                        && dr_is_spacer(dut.u_adder.cin);
        if (dr_is_data(dut.add_cout) && !in_all_data && !bundle_is(dut.add_sum, 1'b1))
          n_early_set++;
        if (bundle_is(dut.add_sum, 1'b0) && dr_is_spacer(dut.add_cout) && !in_all_spacer)
          n_early_reset++;
        if (dr_is_spacer(cout_alias) && dr_is_data(dut.add_cout)) n_alias_early++;
        if (bundle_is(sum, 1'b1) && bundle_is(dut.add_sum, 1'b0)) n_out_hold++;
        checks++;
        begin
          logic bad;
          bad = dr_is_illegal(cout) || dr_is_illegal(cout_alias);
          for (int i = 0; i < N; i++) bad |= dr_is_illegal(sum[i]);
          if (bad) begin
            failures++;
            $display("FAIL illegal 11 code on an output at %0t", $time);
          end
        end
      end
    end
  end

  task automatic shuffle(ref int ord[NIN]);
    for (int i = NIN - 1; i > 0; i--) begin
      int j, t;
      j = $urandom_range(i);
      t = ord[i]; ord[i] = ord[j]; ord[j] = t;
    end
  endtask

  task automatic drive(input int idx, input dr_t d);
    if (idx < N) a[idx] = d;
    else if (idx < 2 * N) b[idx - N] = d;
    else cin = d;
  endtask

  // Sender.
  initial begin
    int ord[NIN];
    logic [N-1:0] va, vb;
    logic         vc;
    logic [NIN-1:0] vals;
    realtime      last_start;
    rst = 1; a = '0; b = '0; cin = '0;
    #5;
    rst = 0;
    #5;
    last_start = -20.0;
    for (int t = 0; t < NTOT; t++) begin
      if (t < NDIR) begin
        va = $urandom(); vb = ~va; vc = 1'(t);
      end else begin
        va = $urandom(); vb = $urandom(); vc = 1'($urandom_range(1));
      end
      if ($realtime < last_start + 20.0) #(last_start + 20.0 - $realtime);
      while (ack_to_sender !== 1'b1) #0.1;
      last_start = $realtime;
      expected.push_back({1'b0, va} + {1'b0, vb} + (N+1)'(vc));
      vals = {vc, vb, va};
      for (int i = 0; i < NIN; i++) ord[i] = i;
      shuffle(ord);
      foreach (ord[i]) begin
        drive(ord[i], dr_enc(vals[ord[i]]));
        #1;
      end
      if (ack_to_sender !== 1'b0) n_sender_stalls++;
      while (ack_to_sender !== 1'b0) #0.1;
      checks++;
      if (!(bundle_is(dut.u_adder.a, 1'b1) && bundle_is(dut.u_adder.b, 1'b1)
            && dr_is_data(dut.u_adder.cin))) begin
        failures++;
        $display("FAIL ack_to_sender fell before the input register was complete");
      end
      shuffle(ord);
      foreach (ord[i]) begin
        drive(ord[i], '0);
        #1;
      end
    end
  end

  // Receiver.
  initial begin
    logic [N:0] got, exp_v;
    ack_from_receiver = 1;
    while (rst !== 1'b0) #0.1;
    for (int t = 0; t < NTOT; t++) begin
      while (!(bundle_is(sum, 1'b1) && dr_is_data(cout))) #0.1;
      #0.1;
      for (int i = 0; i < N; i++) got[i] = sum[i].r1;
      got[N] = cout.r1;
      exp_v = expected.pop_front();
      checks++;
      if (got !== exp_v) begin
        failures++;
        $display("FAIL transfer %0d: got %h expected %h", t, got, exp_v);
      end
      n_transfers++;
      if ($urandom_range(9) == 0) #150;      // an occasional slow receiver
      else #($urandom_range(200) / 10.0);
      ack_from_receiver = 0;
      while (!(bundle_is(sum, 1'b0) && dr_is_spacer(cout))) #0.1;
      #($urandom_range(100) / 10.0);
      ack_from_receiver = 1;
    end
    checks++;
    if (n_transfers != NTOT || n_sender_stalls == 0 || n_early_set == 0 || n_early_reset == 0
        || n_alias_early == 0 || n_out_hold == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("transfers=%0d sender_stalls=%0d early_set=%0d early_reset=%0d alias_early=%0d out_hold=%0d",
             n_transfers, n_sender_stalls, n_early_set, n_early_reset, n_alias_early, n_out_hold);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
