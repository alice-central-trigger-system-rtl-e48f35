// cts_top: Central Trigger System - the CTP firmware driving N_D LTUs.
//
// Data flow, one cycle per bunch crossing (BC):
//   orbit_bc_counter  BC/orbit numbers, HeartBeat frame (HBf = orbit) and
//                     Time Frame starts, shared by all blocks.
//   trigger_input_logic  aligns the 48 trigger inputs and sorts them into
//                     LM, L0 and L1 inputs; global_trigger_generator adds
//                     emulated trigger bits; bc_mask gates by bunch slot.
//   trigger_class x3  the 64 classes at LM, L0 and L1; a class can require
//                     that it fired at the previous level, LM_L0_BC and
//                     L0_L1_BC BCs earlier (delay_line), and is vetoed by the
//                     busy of its cluster.
//   cluster_logic x3  classes -> 18 clusters -> detector triggers per level.
//   busy_logic        cluster busy from the LTUs' busy, the HBr windows and
//                     the CTP's dead time after each LM/L0 it sends
//                     (until the L1 plus BUSY_RTT BCs for the LTU's busy).
//   hbr_generator     per-detector HeartBeat rejects (autonomous, downscale,
//                     collective by CRU buffer status).
//   hb_map_collector, hb_decision  CRU acknowledges -> GHBmap -> per-detector
//                     HeartBeat decision, sent as a decision record.
//   trigger_message_builder x N_D  the per-detector 200-bit TTC-PON frame.
//   olt_mux x N_OLT   DET_PER_OLT detectors share one OLT.
//   record_packer x2  Interaction Record (inputs) and class record (L0
//                     classes) as 80-bit GBT words for the CRU.
//   ltu_core x N_D    the LTUs: CTP emulator for standalone mode, forwarding
//                     to TTC-PON, GBT, RD12 TTC and an LVDS trigger line,
//                     busy, link monitoring.
// The optical transceivers (OLT/ONU, GBT) are not part of the RTL: a frame
// reaches its LTU one BC after the OLT multiplexer. CRU HeartBeat
// acknowledges and buffer statuses enter as ports (one message per BC), as
// do the control registers normally written over IPbus.
// The L0 and L1 class decisions come LM_L0_BC = 10 and L0_L1_BC = 224 BCs
// after LM (Run 2 latencies 650 ns, 900 ns and 6.5 us): an input of the next
// level must reach trigger_input_logic's output exactly that many BCs after
// the previous level's input (the classes' one-BC register is accounted for
// in the delay lines, which are one BC shorter). Detector messages leave the
// message builders 2 BCs after the inputs reach the classes and reach the
// LTU outputs 2 BCs later when the OLT is not contended.
// The HeartBeat decision for HBf n is made when HBf n+8 starts and carries
// orbit n.
module cts_top
  import cts_pkg::*;
#(
  parameter int N_D         = N_DET,
  parameter int DET_PER_OLT = 2,
  parameter int BC_ORBIT    = BC_PER_ORBIT,
  parameter int LM_L0_BC    = 10,
  parameter int L0_L1_BC    = 224,
  parameter int BUSY_RTT    = 10
) (
  input  logic                   clk,
  input  logic                   rst,
  // trigger inputs and run control
  input  logic [N_INPUTS-1:0]    trg_in,
  input  logic                   sot,
  input  logic                   eot,
  input  logic                   cal,
  // CTP configuration
  input  logic [7:0]             tf_len,
  input  logic [3:0]             in_delay [N_INPUTS],
  input  logic [1:0]             in_level [N_INPUTS],
  input  logic [31:0]            gen_period,
  input  logic [31:0]            gen_rnd_thr,
  input  logic                   bcm_we,
  input  logic [11:0]            bcm_waddr,
  input  logic [N_MASKS-1:0]     bcm_wdata,
  input  class_cfg_t             cls_lm [N_CLASSES],
  input  class_cfg_t             cls_l0 [N_CLASSES],
  input  class_cfg_t             cls_l1 [N_CLASSES],
  input  logic [N_CLUSTERS-1:0]  det_in_cluster [N_D],
  input  logic [N_D-1:0]         det_triggered,
  input  hbr_mode_e              hbr_mode [N_D],
  input  logic [7:0]             hbr_n [N_D],
  input  logic [7:0]             hbr_bs_thr [N_D],
  input  logic [N_CRU-1:0]       hbmask [N_D],
  input  logic [N_D-1:0]         hb_func,
  // CRU upstream (HeartBeat acknowledge messages)
  input  logic                   ack_valid,
  input  logic [8:0]             ack_cru,
  input  logic [2:0]             ack_slot,
  input  logic                   ack,
  input  logic                   bs_valid,
  input  logic [4:0]             bs_det,
  input  logic [7:0]             bs,
  // LTU side
  input  logic [N_D-1:0]         standalone,
  input  logic                   emu_run,
  input  logic [7:0]             emu_n_hbr,
  input  logic [31:0]            emu_period,
  input  logic [N_D-1:0]         fee_busy,
  input  logic [N_D-1:0]         cru_valid,
  input  logic [7:0]             cru_cnt [N_D],
  input  logic [1:0]             lvds_level [N_D],
  // outputs
  output logic [PON_USER_W-1:0]  pon_to_cru [N_D],
  output logic [GBT_W-1:0]       gbt_to_fee [N_D],
  output logic [N_D-1:0]         ttc_a,
  output logic [N_D-1:0]         ttc_b,
  output logic [N_D-1:0]         lvds_trg,
  output logic [N_D-1:0]         ltu_busy,
  output logic [15:0]            link_errors [N_D],
  output logic [79:0]            ir_word,
  output logic                   ir_valid,
  output logic [79:0]            cr_word,
  output logic                   cr_valid,
  output logic [N_D-1:0]         hbr,
  output logic [N_D-1:0]         hbd,
  output logic                   hbd_valid,
  output logic                   overflow
);
  localparam int N_OLT = (N_D + DET_PER_OLT - 1) / DET_PER_OLT;

  logic [11:0]            bc;
  logic [31:0]            orbit;
  logic [7:0]             hbf_in_tf;
  logic                   orbit_start, tf_start, hbf_next, tf_next;
  logic [N_INPUTS-1:0]    lm_in, l0_in, l1_in, trg_q;
  logic [N_GEN-1:0]       gen;
  logic [N_MASKS-1:0]     bcmask;
  logic [N_CLUSTERS-1:0]  cluster_busy;
  logic [N_CLASSES-1:0]   f_lm, f_l0, f_l1, p_l0, p_l1;
  logic [N_D-1:0]         d_lm, d_l0, d_l1;
  logic [4:0]             clu_lm [N_CLASSES];
  logic [4:0]             clu_l0 [N_CLASSES];
  logic [4:0]             clu_l1 [N_CLASSES];
  logic                   map_valid;
  logic [N_CRU-1:0]       ghbmap;
  logic [N_D-1:0]         dnonidle, derov;
  logic [PON_USER_W-1:0]  dframe [N_D];
  logic [PON_USER_W-1:0]  olt_frame [N_OLT];
  logic [N_OLT-1:0]       olt_ovf;
  logic                   ir_ovf, cr_ovf;

  // ---------------- timing ----------------
  orbit_bc_counter #(.BC_PER_ORBIT(BC_ORBIT)) u_cnt (
    .clk, .rst, .tf_len, .bc, .orbit, .hbf_in_tf, .orbit_start, .tf_start);
  assign hbf_next = (bc == 12'(BC_ORBIT - 1));
  assign tf_next  = hbf_next && (hbf_in_tf + 8'd1 >= tf_len);

  // ---------------- inputs ----------------
  trigger_input_logic u_in (
    .clk, .rst, .inputs(trg_in), .delay(in_delay), .level(in_level),
    .lm_in, .l0_in, .l1_in);

  global_trigger_generator u_gtg (
    .clk, .rst, .period(gen_period), .rnd_thr(gen_rnd_thr), .gen);

  bc_mask #(.BC_PER_ORBIT(BC_ORBIT)) u_bcm (
    .clk, .bc, .we(bcm_we), .waddr(bcm_waddr), .wdata(bcm_wdata), .mask(bcmask));

  // ---------------- classes ----------------
  trigger_class u_cls_lm (.clk, .rst, .level_in(lm_in), .gen, .bcmask, .cluster_busy,
    .prev_fired('0), .cfg(cls_lm), .fired(f_lm));
  delay_line #(.W(N_CLASSES), .D(LM_L0_BC - 1)) u_d0 (.clk, .rst, .din(f_lm), .dout(p_l0));
  trigger_class u_cls_l0 (.clk, .rst, .level_in(l0_in), .gen, .bcmask, .cluster_busy,
    .prev_fired(p_l0), .cfg(cls_l0), .fired(f_l0));
  delay_line #(.W(N_CLASSES), .D(L0_L1_BC - 1)) u_d1 (.clk, .rst, .din(f_l0), .dout(p_l1));
  trigger_class u_cls_l1 (.clk, .rst, .level_in(l1_in), .gen, .bcmask, .cluster_busy,
    .prev_fired(p_l1), .cfg(cls_l1), .fired(f_l1));

  always_comb begin
    for (int c = 0; c < N_CLASSES; c++) begin
      clu_lm[c] = cls_lm[c].cluster;
      clu_l0[c] = cls_l0[c].cluster;
      clu_l1[c] = cls_l1[c].cluster;
    end
  end

  cluster_logic #(.N_D(N_D)) u_clu_lm (.fired(f_lm), .class_cluster(clu_lm),
    .det_in_cluster, .cluster_trig(), .det_trig(d_lm));
  cluster_logic #(.N_D(N_D)) u_clu_l0 (.fired(f_l0), .class_cluster(clu_l0),
    .det_in_cluster, .cluster_trig(), .det_trig(d_l0));
  cluster_logic #(.N_D(N_D)) u_clu_l1 (.fired(f_l1), .class_cluster(clu_l1),
    .det_in_cluster, .cluster_trig(), .det_trig(d_l1));

  busy_logic #(.N_D(N_D), .DEAD_LM(LM_L0_BC + L0_L1_BC + BUSY_RTT),
               .DEAD_L0(L0_L1_BC + BUSY_RTT)) u_busy (
    .clk, .rst, .det_busy(ltu_busy), .det_hbr(hbr & det_triggered),
    .det_lm(d_lm), .det_l0(d_l0), .det_in_cluster, .cluster_busy);

  // ---------------- HeartBeat ----------------
  hbr_generator #(.N_D(N_D)) u_hbr (
    .clk, .rst, .hbf_next, .tf_next, .tf_len, .bs_valid,
    .bs_det(bs_det[(N_D > 1 ? $clog2(N_D) : 1)-1:0]), .bs,
    .mode(hbr_mode), .n_hbr(hbr_n), .bs_thr(hbr_bs_thr), .hbr);

  hb_map_collector u_map (
    .clk, .rst, .hbf_start(orbit_start), .ack_valid, .ack_cru, .ack_slot, .ack,
    .map_valid, .map_slot(), .ghbmap);

  hb_decision #(.N_D(N_D)) u_hbd (
    .clk, .rst, .map_valid, .ghbmap, .hbmask, .func(hb_func), .hbd_valid, .hbd);

  // ---------------- per-detector messages ----------------
  for (genvar d = 0; d < N_D; d++) begin : g_det
    trigger_message_builder u_msg (
      .clk, .rst, .det_id(8'(d)), .triggered(det_triggered[d]),
      .bc, .orbit, .orbit_start, .tf_start, .hbr(hbr[d]),
      .det_lm(d_lm[d]), .det_l0(d_l0[d]), .det_l1(d_l1[d]),
      .sot, .eot, .cal,
      .hbd_valid, .hbd(hbd[d]), .hbd_orbit(orbit - 32'(HB_DEPTH)),
      .msg(), .msg_valid(), .nonidle(dnonidle[d]), .frame(dframe[d]));
  end

  for (genvar o = 0; o < N_OLT; o++) begin : g_olt
    logic [PON_USER_W-1:0] fin [DET_PER_OLT];
    logic [DET_PER_OLT-1:0] nin;
    always_comb begin
      for (int k = 0; k < DET_PER_OLT; k++) begin
        if (o * DET_PER_OLT + k < N_D) begin
          fin[k] = dframe[o * DET_PER_OLT + k];
          nin[k] = dnonidle[o * DET_PER_OLT + k];
        end else begin
          fin[k] = '0;
          nin[k] = 1'b0;
        end
      end
    end
    olt_mux #(.DET_PER_OLT(DET_PER_OLT)) u_mux (
      .clk, .rst, .frame_in(fin), .nonidle_in(nin),
      .frame_out(olt_frame[o]), .overflow(olt_ovf[o]));
  end

  // ---------------- records to the CRU ----------------
  always_ff @(posedge clk) begin
    if (rst) trg_q <= '0;
    else     trg_q <= trg_in;
  end

  record_packer #(.W(N_INPUTS)) u_ir (
    .clk, .rst, .bc, .orbit, .orbit_start, .payload(trg_q),
    .word(ir_word), .valid(ir_valid), .overflow(ir_ovf));
  record_packer #(.W(N_CLASSES)) u_cr (
    .clk, .rst, .bc, .orbit, .orbit_start, .payload(f_l0),
    .word(cr_word), .valid(cr_valid), .overflow(cr_ovf));

  // ---------------- LTUs ----------------
  for (genvar d = 0; d < N_D; d++) begin : g_ltu
    ltu_core #(.BC_ORBIT(BC_ORBIT), .L0_L1_BC(L0_L1_BC)) u_ltu (
      .clk, .rst, .det_id(8'(d)), .frame_in(olt_frame[d / DET_PER_OLT]),
      .standalone(standalone[d]), .emu_run, .emu_triggered(det_triggered[d]),
      .emu_tf_len(tf_len), .emu_n_hbr, .emu_period, .emu_rnd_thr(32'h0),
      .fee_busy(fee_busy[d]), .cru_valid(cru_valid[d]), .cru_cnt(cru_cnt[d]),
      .lvds_level(lvds_level[d]), .lvds_trg(lvds_trg[d]),
      .pon_out(pon_to_cru[d]), .gbt_out(gbt_to_fee[d]),
      .ttc_a(ttc_a[d]), .ttc_b(ttc_b[d]), .busy(ltu_busy[d]),
      .link_errors(link_errors[d]), .derand_overflow(derov[d]));
  end

  assign overflow = (|olt_ovf) | ir_ovf | cr_ovf | (|derov);
endmodule
