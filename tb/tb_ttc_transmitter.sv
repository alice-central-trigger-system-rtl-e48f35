// tb_ttc_transmitter: LTU RD12 TTC output with a 400-BC orbit and an L0-L1
// time of 30 BCs.
// Phase 1: orbit messages and L0/L1 trigger pairs issued whenever busy is
// low. Checked every BC: TTC-A against a model (L0 = one 1, L1 = two 1s, one
// BC after the message) and that busy covers the whole L0-L1 window; at the
// end every L1 message must have gone out as 7 long words on TTC-B and every
// orbit as a broadcast.
// Phase 2: L1 messages every 40 BCs, faster than TTC-B can send them (294
// BCs each): the derandomizer must raise busy. fee_busy must reach busy.
module tb_ttc_transmitter;
  import cts_pkg::*;
  localparam int L01 = 30;
  logic clk = 0, rst = 1, fee = 0;
  trig_msg_t msg;
  logic ttc_a, ttc_b, busy, ovf;
  logic [2:0] a_exp;
  int checks = 0, failures = 0, n_l1 = 0, n_orb = 0, n_long = 0, n_short = 0, n_dbusy = 0;

  ttc_transmitter #(.L0_L1_BC(L01), .BC_ORBIT(400)) dut (.clk, .rst, .msg, .fee_busy(fee),
    .ttc_a, .ttc_b, .busy, .derand_overflow(ovf));
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #5000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // TTC-B frame counter
  initial begin
    @(negedge rst);
    forever begin
      @(negedge clk);
      if (ttc_b == 1'b0) begin
        @(negedge clk);
        if (ttc_b) begin n_long++; repeat (40) @(negedge clk); end
        else begin n_short++; repeat (14) @(negedge clk); end
      end
    end
  end

  int t;

  // quiet BCs that still carry orbit messages
  task automatic idle(input int n);
    repeat (n) begin
      msg = '0;
      if (t % 400 == 0) begin msg.ttype[TT_ORBIT] = 1; n_orb++; end
      t++;
      @(negedge clk);
    end
    msg = '0;
  endtask

  initial begin
    int l0_at;
    msg = '0;
    a_exp = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    l0_at = -1000;
    for (t = 0; t < 6000; t++) begin
      msg = '0;
      msg.bc = 12'(t % 400); msg.orbit = 32'(t / 400);
      if (t % 400 == 0) begin msg.ttype[TT_ORBIT] = 1; n_orb++; end
      if (t - l0_at == L01) begin
        msg.ttype[TT_PHYS] = 1; msg.level[LV_L1] = 1; n_l1++;
      end else if (!busy && t - l0_at > L01 + 2 && ($urandom % 8) == 0) begin
        msg.ttype[TT_PHYS] = 1; msg.level[LV_L0] = 1; l0_at = t;
      end
      @(negedge clk);
      // model of TTC-A: a_exp[0] is the bit due now
      a_exp = {1'b0, a_exp[2:1]};
      if (msg.level[LV_L0]) a_exp[0] = 1'b1;
      if (msg.level[LV_L1]) a_exp[1:0] = 2'b11;
      chk(ttc_a == a_exp[0], "TTC-A");
      a_exp[0] = 1'b0;
      if (t - l0_at >= 0 && t - l0_at < L01 - 1) chk(busy == 1'b1, "busy during L0-L1");
    end
    idle(8000);
    chk(n_long == 7 * n_l1 && n_l1 > 20, $sformatf("long words %0d for %0d L1", n_long, n_l1));
    chk(n_short == n_orb, $sformatf("broadcasts %0d for %0d orbits", n_short, n_orb));
    // phase 2: derandomizer busy
    n_orb = 0; n_short = 0;
    for (int k = 0; k < 1200; k++) begin
      msg = '0;
      if (t % 400 == 0) begin msg.ttype[TT_ORBIT] = 1; n_orb++; end
      if (k % 40 == 0) begin msg.ttype[TT_PHYS] = 1; msg.level[LV_L1] = 1; end
      t++;
      @(negedge clk);
      if (busy) n_dbusy++;
    end
    msg = '0;
    chk(n_dbusy > 0, "derandomizer busy");
    idle(9000);
    chk(!busy, "busy clears");
    fee = 1;
    repeat (2) @(negedge clk);
    chk(busy, "fee busy");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
