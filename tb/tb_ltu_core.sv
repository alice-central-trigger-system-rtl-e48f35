// tb_ltu_core: one LTU (detector 3) with a 400-BC orbit and an L0-L1 time of
// 30 BCs.
// Global mode: frames for detectors 2 and 3 alternate on the shared OLT; only
// detector 3's frames may reach pon_out and gbt_out (one BC later, message in
// GBT bits [79:0], upper 40 bits zero); an L0 in a frame must produce a TTC-A
// pulse and busy; the LVDS trigger must pulse exactly with the messages of
// the selected level (L0 in the first half, L1 in the second, then off); one
// corrupted CRU link counter must count one error.
// Standalone mode: the LTU's own CTP emulator must produce orbit messages
// every 400 BCs on pon_out while the CTP frames are ignored.
module tb_ltu_core;
  import cts_pkg::*;
  logic clk = 0, rst = 1, sa = 0, run = 0, fee = 0, cv = 0, lvds;
  logic [1:0] lvl = 2'd2;
  logic [7:0] cc = 0;
  logic [199:0] fin, pon, exp_pon;
  logic [119:0] gbt;
  logic ta, tb_, busy, ovf;
  logic [15:0] lerr;
  trig_msg_t m;
  int checks = 0, failures = 0, n_lvds = 0, n_a = 0, n_busy = 0, n_orb = 0, last_orb = -1, n_fwd = 0;

  ltu_core #(.BC_ORBIT(400), .L0_L1_BC(30)) dut (.clk, .rst, .det_id(8'd3), .frame_in(fin),
    .standalone(sa), .emu_run(run), .emu_triggered(1'b1), .emu_tf_len(8'd4), .emu_n_hbr(8'd0),
    .emu_period(32'd50), .emu_rnd_thr(32'd0), .fee_busy(fee), .cru_valid(cv), .cru_cnt(cc),
    .lvds_level(lvl), .pon_out(pon), .gbt_out(gbt), .ttc_a(ta), .ttc_b(tb_), .lvds_trg(lvds), .busy, .link_errors(lerr),
    .derand_overflow(ovf));
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
    fin = '0;
    exp_pon = '0;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int t = 0; t < 3000; t++) begin
      m = '0;
      m.bc = 12'(t % 400); m.orbit = 32'(t / 400);
      if (t % 400 == 0) m.ttype[TT_ORBIT] = 1;
      if (t % 200 == 8) begin m.ttype[TT_PHYS] = 1; m.level[LV_L0] = 1; end
      if (t % 200 == 38) begin m.ttype[TT_PHYS] = 1; m.level[LV_L1] = 1; end
      fin = '0;
      fin[79:0] = m;
      fin[87:80] = (t % 2 == 0) ? 8'd3 : 8'd2;
      fin[119:88] = 32'(t);
      cv = (t % 3 == 0);
      cc = 8'(t / 3) + ((t == 1500) ? 8'd9 : 8'd0);
      exp_pon = (fin[87:80] == 8'd3) ? fin : '0;
      lvl = (t < 1500) ? 2'd2 : (t < 2500) ? 2'd3 : 2'd0;
      @(negedge clk);
      chk(pon == exp_pon && gbt == {40'h0, exp_pon[79:0]}, "forwarding");
      chk(lvds == ((lvl == 2'd2) ? exp_pon[45] : (lvl == 2'd3) ? exp_pon[46] : 1'b0), "LVDS trigger level");
      if (lvds) n_lvds++;
      if (exp_pon != 0) n_fwd++;
      if (ta) n_a++;
      if (busy) n_busy++;
    end
    chk(n_a > 0 && n_busy > 0 && n_fwd > 1000, $sformatf("ttc_a %0d busy %0d fwd %0d", n_a, n_busy, n_fwd));
    chk(lerr == 16'd2, $sformatf("link errors %0d", lerr));
    chk(n_lvds >= 10, $sformatf("LVDS triggers %0d", n_lvds));
    // standalone
    cv = 0;
    sa = 1; run = 1;
    for (int t = 0; t < 2000; t++) begin
      fin = '0;
      fin[87:80] = 8'd3;
      fin[0] = 1'b1;
      @(negedge clk);
      m = trig_msg_t'(pon[79:0]);
      if (m.ttype[TT_ORBIT]) begin
        if (last_orb >= 0) chk(t - last_orb == 400, "emulated orbit period");
        last_orb = t; n_orb++;
      end
      chk(pon[87:80] == 8'd3 && !(m.ttype == 32'h1 && m.orbit == 0 && m.bc == 0 && pon[79:1] == 0), "emulator frame");
    end
    chk(n_orb >= 4, "emulated orbits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
