// tb_cts_rates: the whole trigger system at its default sizes under the
// interaction rates ALICE runs at in Run 3: 50 kHz (Pb-Pb), 500 kHz (p-Pb)
// and 1 MHz (pp), one phase of three orbits each, then two quiet orbits so
// that every buffer drains.
//
// Interactions are random: in each BC one starts with probability
// rate / 40.079 MHz. Each interaction raises LM input 0 at once, L0 input 1
// 10 BCs later and L1 input 2 224 BCs after that. The LM -> L0 -> L1 classes
// 0 trigger cluster 0, which holds detector 10, a triggered detector with
// legacy RD12 TTC front-ends; detector 4 reads out continuously.
// Checked:
//   - the Interaction Record carries one data word for every BC with an input
//     set and one header per orbit; the class record one data word per L0;
//   - the continuous detector gets every orbit message at any rate;
//   - every accepted trigger leaves over TTC-B, the derandomizer never
//     overflows, nothing is lost anywhere;
//   - the triggered detector's accepted rate stays under the TTC-B limit
//     (7 words x 42 BCs per message plus orbit broadcasts, about 133.6 kHz)
//     and reaches at least 90 % of it when 1 MHz is offered;
//   - at 50 kHz most interactions are accepted: the CTP dead time of 244 BCs
//     after each LM (LM-L1 latency plus busy round trip) should keep about
//     1 / (1 + rate x 244 BC) of them, about 77 % at 50 kHz; 80 % of that
//     expectation is required, as the sample is small.
module tb_cts_rates;
  import cts_pkg::*;
  localparam int ND = 18;
  localparam int ORB = 3564;
  localparam int PHASE_ORBITS = 3;
  logic clk = 0, rst = 1;
  logic [47:0] trg_in = '0;
  logic [3:0] in_delay [48];
  logic [1:0] in_level [48];
  class_cfg_t cls_lm [64], cls_l0 [64], cls_l1 [64];
  logic [17:0] dic [ND];
  logic [ND-1:0] det_trig;
  hbr_mode_e hbr_mode [ND];
  logic [7:0] hbr_n [ND], hbr_thr [ND];
  logic [440:0] hbmask [ND];
  logic [ND-1:0] standalone = '0, fee_busy = '0, cru_valid = '0;
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

  cts_top dut (.clk, .rst, .trg_in, .sot(1'b0), .eot(1'b0), .cal(1'b0), .tf_len(8'd128),
    .in_delay, .in_level, .gen_period(32'd0), .gen_rnd_thr(32'd0),
    .bcm_we(1'b0), .bcm_waddr(12'd0), .bcm_wdata(4'd0),
    .cls_lm, .cls_l0, .cls_l1, .det_in_cluster(dic), .det_triggered(det_trig),
    .hbr_mode, .hbr_n, .hbr_bs_thr(hbr_thr), .hbmask, .hb_func(18'd0),
    .ack_valid(1'b0), .ack_cru(9'd0), .ack_slot(3'd0), .ack(1'b0),
    .bs_valid(1'b0), .bs_det(5'd0), .bs(8'd0),
    .standalone, .emu_run(1'b0), .emu_n_hbr(8'd0), .emu_period(32'd0),
    .fee_busy, .cru_valid, .cru_cnt, .lvds_level(lvds_lvl),
    .pon_to_cru(pon), .gbt_to_fee(gbt), .ttc_a, .ttc_b, .lvds_trg(lvds), .ltu_busy, .link_errors(lerr),
    .ir_word, .ir_valid, .cr_word, .cr_valid, .hbr, .hbd, .hbd_valid, .overflow(ovf));
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

  // ---------------- observation ----------------
  int n_lm = 0, n_l0 = 0, n_l1 = 0, n_pop = 0, n_orb4 = 0, n_phys4 = 0;
  int n_ir_hdr = 0, n_ir_dat = 0, n_cr_dat = 0, n_trg_bcs = 0;
  always @(negedge clk) if (!rst) begin
    trig_msg_t m;
    m = trig_msg_t'(pon[10][79:0]);
    if (m.ttype[TT_PHYS]) begin
      if (m.level[LV_LM]) n_lm++;
      if (m.level[LV_L0]) n_l0++;
      if (m.level[LV_L1]) n_l1++;
    end
    if (dut.g_ltu[10].u_ltu.u_ttc.pop) n_pop++;
    m = trig_msg_t'(pon[4][79:0]);
    if (m.ttype[TT_ORBIT]) n_orb4++;
    if (m.ttype[TT_PHYS]) n_phys4++;
    if (ir_valid) begin
      if (ir_word[79]) n_ir_hdr++;
      else             n_ir_dat++;
    end
    if (cr_valid && !cr_word[79]) n_cr_dat++;
  end

  // ---------------- stimulus ----------------
  // pending L0 / L1 input pulses, indexed by BC modulo 256
  logic [255:0] pend_l0 = '0, pend_l1 = '0;
  int t = 0;

  task automatic run_phase(input int rate_khz, input int n_bc);
    int l10, int0, pop0;
    int thr;
    l10 = n_l1; pop0 = n_pop; int0 = 0;
    // probability per BC in units of 2^-24
    thr = int'((longint'(rate_khz) * 1000 * (64'd1 << 24)) / 40079000);
    for (int i = 0; i < n_bc; i++) begin
      logic start;
      int r;
      r = int'($urandom & 32'hFFFFFF);
      start = (rate_khz > 0) && (r < thr);
      if (start) begin
        int0++;
        pend_l0[(t + 10) % 256] = 1'b1;
        pend_l1[(t + 10 + 224) % 256] = 1'b1;
      end
      trg_in = '0;
      trg_in[0] = start;
      trg_in[1] = pend_l0[t % 256];
      trg_in[2] = pend_l1[t % 256];
      pend_l0[t % 256] = 1'b0;
      pend_l1[t % 256] = 1'b0;
      if (trg_in != '0) n_trg_bcs++;
      t++;
      @(negedge clk);
    end
    if (rate_khz > 0) begin
      int acc, sent;
      real acc_khz, off_khz, sent_khz;
      acc = n_l1 - l10;
      sent = n_pop - pop0;
      sent_khz = real'(sent) * 40079.0 / real'(n_bc);
      acc_khz = real'(acc) * 40079.0 / real'(n_bc);
      off_khz = real'(int0) * 40079.0 / real'(n_bc);
      $display("offered %0d kHz: %0d interactions (%0.1f kHz), %0d accepted by the TTC detector (%0.1f kHz), %0d sent on TTC-B (%0.1f kHz)",
               rate_khz, int0, off_khz, acc, acc_khz, sent, sent_khz);
      // TTC-B sends at most one message per 294 BCs; acceptance may run ahead
      // of it by what the derandomizer holds
      chk(sent <= n_bc / 294, $sformatf("TTC-B rate limit at %0d kHz (%0d)", rate_khz, sent));
      chk(acc <= sent + 8 + 2, $sformatf("acceptance bounded by TTC-B plus buffer at %0d kHz", rate_khz));
      chk(acc <= int0, "no more triggers than interactions");
      if (rate_khz >= 1000)
        chk(sent_khz >= 0.9 * 133.6, $sformatf("TTC-B saturated at %0d kHz (%0.1f kHz)", rate_khz, sent_khz));
      // at low rate the CTP dead time after each LM (244 BCs) is what loses
      // interactions: accepted fraction about 1 / (1 + rate x dead time)
      if (rate_khz <= 50)
        chk(real'(acc) >= 0.8 * real'(int0) / (1.0 + off_khz * 244.0 / 40079.0),
            $sformatf("dead time at %0d kHz", rate_khz));
    end
  endtask

  initial begin
    for (int i = 0; i < 48; i++) begin in_delay[i] = 0; in_level[i] = 2'd3; end
    in_level[0] = 2'd0; in_level[1] = 2'd1; in_level[2] = 2'd2;
    for (int c = 0; c < 64; c++) begin cls_lm[c] = '0; cls_l0[c] = '0; cls_l1[c] = '0; end
    cls_lm[0].enable = 1; cls_lm[0].in_mask[0] = 1; cls_lm[0].cluster = 0;
    cls_l0[0].enable = 1; cls_l0[0].in_mask[1] = 1; cls_l0[0].cluster = 0; cls_l0[0].need_prev = 1;
    cls_l1[0].enable = 1; cls_l1[0].in_mask[2] = 1; cls_l1[0].cluster = 0; cls_l1[0].need_prev = 1;
    for (int d = 0; d < ND; d++) begin
      dic[d] = '0; hbr_mode[d] = HBR_AUTONOMOUS; hbr_n[d] = 0; hbr_thr[d] = 8'd255;
      hbmask[d] = '0; cru_cnt[d] = 0; lvds_lvl[d] = 2'd0;
    end
    dic[10][0] = 1;
    det_trig = '0; det_trig[10] = 1;
    repeat (3) @(negedge clk);
    rst = 0;
    run_phase(50, PHASE_ORBITS * ORB);
    run_phase(500, PHASE_ORBITS * ORB);
    run_phase(1000, PHASE_ORBITS * ORB);
    run_phase(0, 2 * ORB);               // drain
    $display("LM %0d L0 %0d L1 %0d TTC-B messages %0d; IR %0d headers %0d data (%0d BCs with inputs); CR %0d; det 4 orbits %0d",
             n_lm, n_l0, n_l1, n_pop, n_ir_hdr, n_ir_dat, n_trg_bcs, n_cr_dat, n_orb4);
    chk(n_l0 == n_lm && n_l1 == n_l0, "every accepted LM reaches L0 and L1");
    chk(n_pop == n_l1, "every L1 message sent over TTC-B");
    chk(n_ir_dat == n_trg_bcs, "one IR data word per BC with inputs");
    chk(n_ir_hdr == n_orb4, "one IR header per orbit");
    chk(n_cr_dat == n_l0, "one class record word per L0");
    chk(n_orb4 == 11, "continuous detector gets every orbit");
    chk(n_phys4 == 0, "continuous detector gets no physics triggers");
    chk(!ovf, "no buffer overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
