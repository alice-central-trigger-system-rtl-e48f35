// ltu_core: one Local Trigger Unit (LTU), the interface between the CTP and
// one detector.
//
// Downstream, the LTU receives the CTP's 200-bit TTC-PON frames through its
// ONU. Frames whose destination byte (bits 87:80) names another detector on
// the same OLT are ignored. In standalone mode the frames of the LTU's own
// CTP emulator replace the CTP's. The selected frame is forwarded
//   - to the detector's CRUs over TTC-PON (pon_out, 200 bits),
//   - to front-end electronics over GBT (gbt_out, 120 bits, the 80-bit trigger
//     message in bits [79:0]; bits [119:80] belong to the GBT core and are
//     left zero here),
//   - to legacy front-ends over RD12 TTC (ttc_a, ttc_b) via ttc_transmitter,
//   - as an LVDS trigger pulse (lvds_trg) for front-ends that take one trigger
//     level on an electrical line: lvds_level selects it (0 off, 1 LM, 2 L0,
//     3 L1) and lvds_trg is high for the one BC whose message carries that
//     level. The per-detector LVDS levels (e.g. L0 for CPV, LM for HMPID) are
//     listed in the system description; the pulse form is this design's.
// Upstream, the LTU returns busy (TTC internal and derandomizer busy plus the
// detector's BUSY line) and checks the CRU link counters with lhmon.
// All outputs are registered; pon_out/gbt_out/lvds_trg lag frame_in by one BC.
module ltu_core
  import cts_pkg::*;
#(
  parameter int BC_ORBIT = BC_PER_ORBIT,
  parameter int L0_L1_BC = 224
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [7:0]            det_id,
  input  logic [PON_USER_W-1:0] frame_in,
  input  logic                  standalone,
  input  logic                  emu_run,
  input  logic                  emu_triggered,
  input  logic [7:0]            emu_tf_len,
  input  logic [7:0]            emu_n_hbr,
  input  logic [31:0]           emu_period,
  input  logic [31:0]           emu_rnd_thr,
  input  logic                  fee_busy,
  input  logic                  cru_valid,
  input  logic [7:0]            cru_cnt,
  input  logic [1:0]            lvds_level,
  output logic [PON_USER_W-1:0] pon_out,
  output logic [GBT_W-1:0]      gbt_out,
  output logic                  ttc_a,
  output logic                  ttc_b,
  output logic                  lvds_trg,
  output logic                  busy,
  output logic [15:0]           link_errors,
  output logic                  derand_overflow
);
  trig_msg_t             sel_msg;
  logic [PON_USER_W-1:0] emu_frame, sel_frame;
  logic                  mine;

  ctp_emulator #(.BC_ORBIT(BC_ORBIT), .L0_L1_BC(L0_L1_BC)) u_emu (
    .clk, .rst, .det_id, .run(emu_run && standalone), .triggered(emu_triggered),
    .tf_len(emu_tf_len), .n_hbr(emu_n_hbr), .trig_period(emu_period),
    .trig_rnd_thr(emu_rnd_thr), .busy_in(busy),
    .msg(), .msg_valid(), .frame(emu_frame));

  assign mine = (frame_in[87:80] == det_id);

  always_comb begin
    if (standalone)  sel_frame = emu_frame;
    else if (mine)   sel_frame = frame_in;
    else             sel_frame = '0;
    sel_msg = trig_msg_t'(sel_frame[79:0]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      pon_out  <= '0;
      gbt_out  <= '0;
      lvds_trg <= 1'b0;
    end else begin
      pon_out  <= sel_frame;
      gbt_out  <= {40'h0, sel_msg};
      lvds_trg <= (lvds_level != 2'd0) && sel_msg.level[lvds_level - 2'd1];
    end
  end

  ttc_transmitter #(.L0_L1_BC(L0_L1_BC), .BC_ORBIT(BC_ORBIT)) u_ttc (
    .clk, .rst, .msg(sel_msg), .fee_busy, .ttc_a, .ttc_b, .busy,
    .derand_overflow);

  lhmon u_lhmon (
    .clk, .rst, .resync(1'b0), .valid(cru_valid), .cnt(cru_cnt),
    .ok(), .err_cnt(link_errors));
endmodule
