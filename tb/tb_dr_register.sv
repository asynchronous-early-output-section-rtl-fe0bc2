// tb_dr_register: self-checking test of the dual-rail stage register.
//
// A 4-bit register is reset, then taken through 200 random 4-phase cycles.
// With ACKIN=1 data bits are applied one at a time: each must appear at the
// output as soon as it arrives. ACKIN then falls and the input goes to
// spacer one bit at a time: the register must hold its data until ACKIN is
// low and the input bit is spacer; bits are checked one by one. A spacer
// presented while ACKIN=1 after data, and data while ACKIN=0 after spacer,
// must both be ignored (the register holds). Reset must clear everything.
`timescale 1ns/1ps
module tb_dr_register;
  import qdi_pkg::*;
  localparam int W = 4;
  logic        rst, ackin;
  dr_t [W-1:0] d, q;
  int checks = 0, failures = 0, n_hold_data = 0, n_hold_spacer = 0;

  dr_register #(.W(W)) dut (.rst(rst), .d(d), .ackin(ackin), .q(q));

  initial begin
    #1000000;
    $display("watchdog expired");
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_q(input string what, input dr_t [W-1:0] e);
    checks++;
    if (q !== e) begin
      failures++;
      $display("FAIL %s: d=%b ackin=%b q=%b expected %b", what, d, ackin, q, e);
    end
  endtask

  initial begin
    dr_t [W-1:0] data;
    rst = 1; ackin = 1; d = '0;
    #1;
    expect_q("reset", '0);
    rst = 0;
    #1;
    for (int t = 0; t < 200; t++) begin
      logic [W-1:0] v;
      v = W'($urandom());
      for (int i = 0; i < W; i++) data[i] = dr_enc(v[i]);
      // data arrives bit by bit while ACKIN = 1
      for (int i = 0; i < W; i++) begin
        dr_t [W-1:0] e;
        d[i] = data[i];
        #1;
        e = '0;
        for (int j = 0; j <= i; j++) e[j] = data[j];
        expect_q("data pass", e);
      end
      // spacer while ACKIN still 1: register must hold its data
      d = '0;
      #1;
      expect_q("hold data while ackin=1", data);
      n_hold_data++;
      d = data;
      ackin = 0;
      #1;
      expect_q("hold data after ackin fall", data);
      // spacer arrives bit by bit while ACKIN = 0
      for (int i = 0; i < W; i++) begin
        dr_t [W-1:0] e;
        d[i] = '0;
        #1;
        e = data;
        for (int j = 0; j <= i; j++) e[j] = '0;
        expect_q("spacer pass", e);
      end
      // new data while ACKIN still 0: register must hold its spacer
      d = data;
      #1;
      expect_q("hold spacer while ackin=0", '0);
      n_hold_spacer++;
      d = '0;
      ackin = 1;
      #1;
      if (t == 100) begin
        d = data;
        #1;
        rst = 1;
        #1;
        expect_q("reset clears data", '0);
        rst = 0;
        d = '0;
        #1;
      end
    end
    checks++;
    if (n_hold_data == 0 || n_hold_spacer == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
