// tb_ctp_emulator: standalone-mode message generator of an LTU, with a
// 200-BC orbit, 4 orbits per Time Frame, one HeartBeat reject per TF, a
// periodic trigger request every 13 BCs and an L0-L1 time of 20 BCs.
// Checked from the emitted messages: start of run first, an ORBIT+HB message
// every 200 BCs with consecutive orbit numbers, a TF flag every 4th orbit,
// exactly one HBr per TF (from the second TF on: the first TF after reset
// starts without a decision), every L1 exactly 20 BCs after its L0, no L0 inside
// a rejected HeartBeat frame or while busy_in is high, end of run last.
module tb_ctp_emulator;
  import cts_pkg::*;
  logic clk = 0, rst = 1, run = 0, busy_in = 0;
  trig_msg_t msg;
  logic mv;
  logic [199:0] frame;
  int checks = 0, failures = 0;

  ctp_emulator #(.BC_ORBIT(200), .L0_L1_BC(20)) dut (.clk, .rst, .det_id(8'd3), .run,
    .triggered(1'b1), .tf_len(8'd4), .n_hbr(8'd1), .trig_period(32'd13), .trig_rnd_thr(32'd0),
    .busy_in, .msg, .msg_valid(mv), .frame);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int t, last_orbit_t, n_orbit, n_tf, hbr_in_tf, l0_t, n_l0, n_l1, n_sot, n_eot;
    logic in_hbr, busy_q;
    last_orbit_t = -1; n_orbit = 0; n_tf = 0; hbr_in_tf = 0; l0_t = -1;
    n_l0 = 0; n_l1 = 0; n_sot = 0; n_eot = 0; in_hbr = 0; busy_q = 0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0; run = 1;
    for (t = 0; t < 200 * 4 * 6; t++) begin
      busy_in = (t % 700) > 600;
      @(negedge clk);
      if (mv) begin
        if (msg.ttype[TT_SOT]) n_sot++;
        if (msg.ttype[TT_ORBIT]) begin
          chk(msg.ttype[TT_HB] && msg.bc == 0, "orbit message has HB at BC 0");
          if (last_orbit_t >= 0) chk(t - last_orbit_t == 200, "orbit period");
          last_orbit_t = t;
          if (msg.ttype[TT_TF]) begin
            if (n_tf > 1) chk(hbr_in_tf == 1, $sformatf("%0d HBr in TF", hbr_in_tf));
            n_tf++; hbr_in_tf = 0;
            chk(n_orbit % 4 == 0, "TF every 4 orbits");
          end
          n_orbit++;
          in_hbr = msg.ttype[TT_HBR];
          if (in_hbr) hbr_in_tf++;
        end
        if (msg.ttype[TT_PHYS] && msg.level[LV_L0]) begin
          chk(!in_hbr, "no L0 in HBr frame");
          chk(!busy_q, "no L0 while busy");
          l0_t = t; n_l0++;
        end
        if (msg.ttype[TT_PHYS] && msg.level[LV_L1]) begin
          chk(t - l0_t == 20, "L1 20 BCs after L0");
          n_l1++;
        end
      end
      busy_q = busy_in;
    end
    run = 0;
    repeat (3) begin @(negedge clk); if (mv && msg.ttype[TT_EOT]) n_eot++; end
    chk(n_sot == 1 && n_eot == 1, "start/end of run");
    chk(n_l0 > 50 && n_l1 >= n_l0 - 1 && n_tf >= 5, $sformatf("counts l0 %0d l1 %0d tf %0d", n_l0, n_l1, n_tf));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
