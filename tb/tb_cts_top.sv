// tb_cts_top: end-to-end run of the whole trigger system at its default
// sizes (3564-BC orbits, 48 inputs, 64 classes, 18 clusters, 18 LTUs,
// 441 CRUs); only the programmable Time Frame length is set short (4 HBf).
// Thirteen orbits are simulated. Configuration:
//   inputs 0/1/2 are LM/L0/L1 inputs; LM class 0 -> L0 class 0 -> L1 class 0
//   form a three-level trigger for cluster 0 (detector 10, a TTC detector);
//   L0 class 1 uses the periodic generator (every 7 BCs), BC mask 0 (even
//   BCs only) and downscale 1, for cluster 1 (detector 11, HBr downscale 2
//   per TF); L0 class 2 uses input 1 for cluster 2 (detector 13, whose
//   front-end raises BUSY for a while).
//   HeartBeat: CRUs 0..9 acknowledge every frame except CRU 6; detector 0
//   decides with ALL over CRUs 0..3, detector 1 with ALL over CRUs 5..6,
//   detector 2 with ANY over CRUs 5..6. Detector 4 rejects 1 HBf per TF
//   (downscale), detector 5 rejects after a high buffer status (collective).
//   LTU 10 also drives its LVDS line at L0. LTU 17 runs standalone with its
//   own CTP emulator. LTU 0 sees one corrupted link counter word.
// Every mechanism is counted and must have happened at least once; the
// checks compare what arrives at the LTU outputs with what the configuration
// implies (latencies, levels, HeartBeat decisions, vetoes).
module tb_cts_top;
  import cts_pkg::*;
  localparam int ND = 18;
  logic clk = 0, rst = 1;
  logic [47:0] trg_in = '0;
  logic sot = 0, eot = 0, cal = 0;
  logic [7:0] tf_len = 8'd4;
  logic [3:0] in_delay [48];
  logic [1:0] in_level [48];
  logic bcm_we = 0;
  logic [11:0] bcm_waddr = 0;
  logic [3:0] bcm_wdata = 0;
  class_cfg_t cls_lm [64], cls_l0 [64], cls_l1 [64];
  logic [17:0] dic [ND];
  logic [ND-1:0] det_trig;
  hbr_mode_e hbr_mode [ND];
  logic [7:0] hbr_n [ND], hbr_thr [ND];
  logic [440:0] hbmask [ND];
  logic [ND-1:0] hb_func;
  logic ack_valid = 0, ack = 0, bs_valid = 0;
  logic [8:0] ack_cru = 0;
  logic [2:0] ack_slot = 0;
  logic [4:0] bs_det = 0;
  logic [7:0] bs = 0;
  logic [ND-1:0] standalone, fee_busy = '0, cru_valid = '0;
  logic [7:0] cru_cnt [ND];
  logic [1:0] lvds_lvl [ND];
  logic [ND-1:0] lvds;
  logic [199:0] pon [ND];
  logic [119:0] gbt [ND];
  logic [ND-1:0] ttc_a, ttc_b, ltu_busy, hbr, hbd;
  logic [15:0] lerr [ND];
  logic [79:0] ir_word, cr_word;
  logic ir_valid, cr_valid, hbd_valid, ovf;
  int checks = 0, failures = 0;

  cts_top dut (.clk, .rst, .trg_in, .sot, .eot, .cal, .tf_len, .in_delay, .in_level,
    .gen_period(32'd7), .gen_rnd_thr(32'd0), .bcm_we, .bcm_waddr, .bcm_wdata,
    .cls_lm, .cls_l0, .cls_l1, .det_in_cluster(dic), .det_triggered(det_trig),
    .hbr_mode, .hbr_n, .hbr_bs_thr(hbr_thr), .hbmask, .hb_func,
    .ack_valid, .ack_cru, .ack_slot, .ack, .bs_valid, .bs_det, .bs,
    .standalone, .emu_run(1'b1), .emu_n_hbr(8'd0), .emu_period(32'd100),
    .fee_busy, .cru_valid, .cru_cnt, .lvds_level(lvds_lvl),
    .pon_to_cru(pon), .gbt_to_fee(gbt), .ttc_a, .ttc_b, .lvds_trg(lvds), .ltu_busy, .link_errors(lerr),
    .ir_word, .ir_valid, .cr_word, .cr_valid, .hbr, .hbd, .hbd_valid, .overflow(ovf));
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // mechanism counters
  int n_lm = 0, n_l0 = 0, n_l1 = 0, n_ttca = 0, n_ttcb0 = 0, n_gen = 0, n_busyveto = 0,
      n_busy_l0 = 0, n_hbr4 = 0, n_hbr5 = 0, n_hbr11 = 0, n_l0_11_in_hbr = 0, n_hbdr = 0, n_hbdr1 = 0, n_hbdr2 = 0, lcnt = 0,
      n_emu_orb = 0, n_emu_l0 = 0, n_ir = 0, n_cr = 0, n_orb_msgs = 0, n_input1 = 0,
      n_det13 = 0, n_olt_q = 0, n_lvds = 0, n_olt_byp = 0, n_ttc_busy = 0, last_11 = -100000, min_gap_11 = 100000, n_oddmask = 0;
  int t = 0;
  logic in_hbr11 = 0;

  initial begin
    #20000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // ---------------- observation at the LTU outputs ----------------
  always @(negedge clk) if (!rst) begin
    trig_msg_t m;
    // detector 10: three-level trigger
    m = trig_msg_t'(pon[10][79:0]);
    if (m.ttype[TT_PHYS]) begin
      if (m.level[LV_LM]) n_lm++;
      if (m.level[LV_L0]) n_l0++;
      if (m.level[LV_L1]) n_l1++;
      chk(gbt[10][79:0] == pon[10][79:0], "GBT carries the same message");
    end
    if (ttc_a[10]) n_ttca++;
    if (ltu_busy[10]) n_ttc_busy++;
    if (lvds[10]) n_lvds++;
    // OLT 0 (detectors 0 and 1): frames queued behind the other detector's,
    // and frames sent straight through
    if (dut.g_olt[0].u_mux.sel_ok) n_olt_q++;
    if (dut.g_olt[0].u_mux.byp_ok) n_olt_byp++;
    if (!ttc_b[10]) n_ttcb0++;
    // detector 11: generator class, BC mask, downscale, HBr veto
    m = trig_msg_t'(pon[11][79:0]);
    if (m.ttype[TT_ORBIT]) begin
      in_hbr11 = m.ttype[TT_HBR];
      if (in_hbr11) n_hbr11++;
    end
    if (m.ttype[TT_PHYS] && m.level[LV_L0]) begin
      n_gen++;
      if (in_hbr11 && m.bc > 12'd8) n_l0_11_in_hbr++;
      if (m.bc[0] != 1'b1) n_oddmask++;     // evaluated at bc-1, must be even
      if (t - last_11 < min_gap_11) min_gap_11 = t - last_11;
      last_11 = t;
    end
    // detector 13: busy veto
    m = trig_msg_t'(pon[13][79:0]);
    if (m.ttype[TT_PHYS] && m.level[LV_L0]) begin
      n_det13++;
      if (fee_busy[13]) n_busy_l0++;
    end
    // HBr of detectors 4, 5
    m = trig_msg_t'(pon[4][79:0]);
    if (m.ttype[TT_ORBIT]) begin n_orb_msgs++; if (m.ttype[TT_HBR]) n_hbr4++; end
    m = trig_msg_t'(pon[5][79:0]);
    if (m.ttype[TT_ORBIT] && m.ttype[TT_HBR]) n_hbr5++;
    // HeartBeat decision records
    // (detectors 0 and 1 share an OLT: their records arrive in different BCs)
    if (pon[0][153]) begin
      n_hbdr++;
      chk(pon[0][152] == 1'b1, "HBd det 0 (ALL over acked CRUs) = 1");
      chk(pon[0][151:120] + 32'd8 == dut.orbit, "HBDR names the frame 8 HBf back");
    end
    if (pon[1][153]) begin
      n_hbdr1++;
      chk(pon[1][152] == 1'b0, "HBd det 1 (ALL incl. silent CRU) = 0");
    end
    if (pon[2][153]) begin
      n_hbdr2++;
      chk(pon[2][152] == 1'b1, "HBd det 2 (ANY) = 1");
    end
    // standalone LTU 17
    m = trig_msg_t'(pon[17][79:0]);
    if (m.ttype[TT_ORBIT]) n_emu_orb++;
    if (m.ttype[TT_PHYS] && m.level[LV_L0]) n_emu_l0++;
    if (ir_valid) n_ir++;
    if (cr_valid) n_cr++;
  end

  // ---------------- stimulus ----------------
  initial begin
    for (int i = 0; i < 48; i++) begin in_delay[i] = 0; in_level[i] = 2'd3; end
    in_level[0] = 2'd0; in_level[1] = 2'd1; in_level[2] = 2'd2;
    for (int c = 0; c < 64; c++) begin cls_lm[c] = '0; cls_l0[c] = '0; cls_l1[c] = '0; end
    cls_lm[0].enable = 1; cls_lm[0].in_mask[0] = 1; cls_lm[0].cluster = 0;
    cls_l0[0].enable = 1; cls_l0[0].in_mask[1] = 1; cls_l0[0].cluster = 0; cls_l0[0].need_prev = 1;
    cls_l1[0].enable = 1; cls_l1[0].in_mask[2] = 1; cls_l1[0].cluster = 0; cls_l1[0].need_prev = 1;
    cls_l0[1].enable = 1; cls_l0[1].gen_mask = 2'b01; cls_l0[1].cluster = 1;
    cls_l0[1].bcm_en = 1; cls_l0[1].bcm_sel = 0; cls_l0[1].downscale = 1;
    cls_l0[2].enable = 1; cls_l0[2].in_mask[1] = 1; cls_l0[2].cluster = 2;
    for (int d = 0; d < ND; d++) begin
      dic[d] = '0; hbr_mode[d] = HBR_AUTONOMOUS; hbr_n[d] = 0; hbr_thr[d] = 8'd200;
      hbmask[d] = '0; cru_cnt[d] = 0; lvds_lvl[d] = 2'd0;
    end
    lvds_lvl[10] = 2'd2;   // detector 10 also takes L0 on an LVDS line
    dic[10][0] = 1; dic[11][1] = 1; dic[13][2] = 1;
    det_trig = '0; det_trig[10] = 1; det_trig[11] = 1; det_trig[13] = 1; det_trig[17] = 1;
    hbr_mode[4] = HBR_DOWNSCALE; hbr_n[4] = 1;
    hbr_mode[11] = HBR_DOWNSCALE; hbr_n[11] = 2;
    hbr_mode[5] = HBR_COLLECTIVE;
    hbmask[0][3:0] = 4'hF; hbmask[1][6:5] = 2'b11; hbmask[2][6:5] = 2'b11;
    hb_func = '0; hb_func[2] = 1;
    standalone = '0; standalone[17] = 1;
    repeat (3) @(posedge clk);
    // load BC mask 0 = even BCs (mask memory has no reset)
    for (int b = 0; b < 3564; b++) begin
      @(negedge clk); bcm_we = 1; bcm_waddr = 12'(b); bcm_wdata = {3'b111, ~b[0]};
    end
    @(negedge clk); bcm_we = 0;
    rst = 1;
    repeat (2) @(negedge clk);
    rst = 0;
    sot = 1;
    for (t = 0; t < 13 * 3564; t++) begin
      int bcx, orb;
      bcx = t % 3564; orb = t / 3564;
      sot = (t == 0);
      // three-level trigger sequences every 600 BCs
      trg_in = '0;
      if (bcx % 600 == 100) trg_in[0] = 1;
      if (bcx % 600 == 110) begin trg_in[1] = 1; n_input1++; if (fee_busy[13]) n_busyveto++; end
      if (bcx % 600 == 334) trg_in[2] = 1;
      fee_busy[13] = (orb == 3 || orb == 4);
      // HeartBeat acknowledges: CRUs 0..9 except 6, in the first BCs of a frame
      ack_valid = (bcx >= 20 && bcx < 30 && bcx != 26);
      ack = 1; ack_cru = 9'(bcx - 20); ack_slot = 3'(orb % 8);
      // buffer status for detector 5: high in orbits 2 and 6
      bs_valid = (bcx == 1000); bs_det = 5'd5; bs = (orb == 2 || orb == 6) ? 8'd250 : 8'd10;
      // link counter of LTU 0, one jump
      cru_valid[0] = (bcx % 50 == 0);
      if (cru_valid[0]) begin
        cru_cnt[0] = 8'(lcnt) + ((lcnt == 400) ? 8'd5 : 8'd0);
        lcnt++;
      end
      @(negedge clk);
    end
    trg_in = '0; ack_valid = 0; bs_valid = 0; cru_valid = '0;
    repeat (10) @(negedge clk);
    // ---------------- results ----------------
    $display("LM %0d L0 %0d L1 %0d ttc_a %0d gen %0d hbr4 %0d hbr5 %0d hbr11 %0d hbdr %0d emu %0d/%0d ir %0d cr %0d det13 %0d",
             n_lm, n_l0, n_l1, n_ttca, n_gen, n_hbr4, n_hbr5, n_hbr11, n_hbdr, n_emu_orb, n_emu_l0, n_ir, n_cr, n_det13);
    chk(n_lm > 20 && n_l0 == n_lm && n_l1 == n_l0, "LM -> L0 -> L1 cascade delivered");
    chk(n_ttca == n_l0 + 2 * n_l1, "TTC-A: one bit per L0, two per L1");
    chk(n_lvds == n_l0, $sformatf("LVDS L0 pulses %0d", n_lvds));
    chk(n_ttcb0 > 7 * n_l1, "TTC-B long words sent");
    chk(n_gen > 20, "generator class fired");
    chk(n_oddmask == 0, "BC mask respected");
    chk(min_gap_11 >= 28, $sformatf("downscale halves the generator rate (gap %0d)", min_gap_11));
    chk(n_hbr11 > 0 && n_l0_11_in_hbr == 0, "HBr frames veto triggers");
    chk(n_busyveto > 0 && n_busy_l0 == 0 && n_det13 > 0, "BUSY vetoes the cluster");
    // orbits 0..13 are seen; the first TF (orbits 0-3) has no HBr because its
    // decision predates the run; HBr falls on the 4th frame: orbits 7, 11
    chk(n_hbr4 == 2, $sformatf("downscale HBr: 1 per TF of 4 (%0d)", n_hbr4));
    chk(n_hbr5 == 2, "collective HBr after high buffer status");
    // frames 0..5 are decided at the starts of orbits 8..13
    chk(n_hbdr == 6 && n_hbdr1 == 6 && n_hbdr2 == 6, "one decision record per frame once 8 frames old");
    chk(n_emu_orb >= 12 && n_emu_l0 > 100, "standalone LTU runs its emulator");
    chk(n_ir >= 13 + 3 * 6 * 13 - 6 && n_cr > 20, "interaction and class records");
    chk(lerr[0] == 16'd2, "link health monitor: one corrupted word, two errors");
    chk(n_orb_msgs == 14, "orbit messages");
    chk(!ovf, "no overflow");
    $display("OLT 0: %0d queued, %0d bypassed; TTC busy BCs of detector 10: %0d", n_olt_q, n_olt_byp, n_ttc_busy);
    chk(n_olt_q >= 14 && n_olt_byp >= 14, "OLT sharing: both queued and bypassed frames");
    chk(n_ttc_busy >= 224 * n_l0, "TTC busy held for the L0-L1 window after each L0");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
