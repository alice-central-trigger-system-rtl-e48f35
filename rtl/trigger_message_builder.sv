// trigger_message_builder: downstream message and TTC-PON frame of one detector.
//
// Every BC the CTP sends each detector's LTU 25 user bytes (200 bits) over
// TTC-PON. This module assembles them for one detector:
//   bytes  0..9   the 80-bit trigger message of this BC (cts_pkg::trig_msg_t):
//                 trigger type, BC, level, orbit
//   byte   10     destination detector id
//   bytes 11..14  monitoring: number of non-idle messages sent (wrapping)
//   bytes 15..24  HeartBeat Decision Record (HBDR): bits 120..151 orbit of
//                 the decided HBf, bit 152 the decision HBd, bit 153 valid
// Trigger type bits set by this module: ORBIT, HB and (if hbr) HBR in the first
// BC of each orbit, TF at the start of each Time Frame, SOT/EOT/CAL from the
// run-control pulses, PHYS with the level bits LM/L0/L1 when the detector's
// clusters triggered. Detectors in continuous readout (triggered = 0) get no
// physics triggers. Byte 0 sits in frame bits [7:0]. The split into 15
// message/monitoring bytes and 10 HBDR bytes follows the system description;
// the byte contents beyond the message are this design's choice.
// Outputs are registered: one BC latency. msg_valid / nonidle flag frames that
// carry anything other than an empty message.
module trigger_message_builder
  import cts_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst,
  input  logic [7:0]            det_id,
  input  logic                  triggered,
  input  logic [11:0]           bc,
  input  logic [31:0]           orbit,
  input  logic                  orbit_start,
  input  logic                  tf_start,
  input  logic                  hbr,
  input  logic                  det_lm,
  input  logic                  det_l0,
  input  logic                  det_l1,
  input  logic                  sot,
  input  logic                  eot,
  input  logic                  cal,
  input  logic                  hbd_valid,
  input  logic                  hbd,
  input  logic [31:0]           hbd_orbit,
  output trig_msg_t             msg,
  output logic                  msg_valid,
  output logic                  nonidle,
  output logic [PON_USER_W-1:0] frame
);
  trig_msg_t   m;
  logic [31:0] sent;

  always_comb begin
    m       = '0;
    m.bc    = bc;
    m.orbit = orbit;
    if (orbit_start) begin
      m.ttype[TT_ORBIT] = 1'b1;
      m.ttype[TT_HB]    = 1'b1;
      m.ttype[TT_HBR]   = hbr;
    end
    m.ttype[TT_TF]  = tf_start;
    m.ttype[TT_SOT] = sot;
    m.ttype[TT_EOT] = eot;
    m.ttype[TT_CAL] = cal;
    if (triggered && (det_lm || det_l0 || det_l1)) begin
      m.ttype[TT_PHYS] = 1'b1;
      m.level[LV_LM]   = det_lm;
      m.level[LV_L0]   = det_l0;
      m.level[LV_L1]   = det_l1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      msg       <= '0;
      msg_valid <= 1'b0;
      nonidle   <= 1'b0;
      frame     <= '0;
      sent      <= '0;
    end else begin
      msg       <= m;
      msg_valid <= (m.ttype != '0);
      nonidle   <= (m.ttype != '0) || hbd_valid;
      if ((m.ttype != '0) || hbd_valid) sent <= sent + 32'd1;
      frame            <= '0;
      frame[79:0]      <= m;
      frame[87:80]     <= det_id;
      frame[119:88]    <= sent;
      frame[151:120]   <= hbd_orbit;
      frame[152]       <= hbd_valid && hbd;
      frame[153]       <= hbd_valid;
    end
  end
endmodule
