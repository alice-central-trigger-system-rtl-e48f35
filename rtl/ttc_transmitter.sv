// ttc_transmitter: RD12 TTC output of an LTU for detectors that kept the
// legacy TTC front-end electronics (and the triggers of the TRD).
//
// Input is the trigger message the LTU forwards in each BC. Channel A is
// synchronous: an L0 trigger is sent as a single 1 bit, an L1 trigger as two
// consecutive 1 bits, starting one BC after the message (reading the "2-bit
// LL1" of the system description as two consecutive bits is this design's
// choice). Messages of L1-accepted physics triggers lose their level field
// (76 bits remain) and are queued in the derandomizer, from which the TTC-B
// serializer sends them as 7 Hamming-protected long words. Orbit messages
// cause an orbit broadcast on TTC-B, calibration messages a calibration
// broadcast.
// Busy towards the CTP is the OR of
//   - an internal busy held for L0_L1_BC BCs after every L0, covering the time
//     until the L1 decision and the delay of the detector's own busy, as the
//     system description prescribes;
//   - the derandomizer busy (buffer nearly full);
//   - the detector's own BUSY line (fee_busy).
// busy is registered.
module ttc_transmitter
  import cts_pkg::*;
#(
  parameter int L0_L1_BC = 224,      // 6.5 us - 0.9 us in BCs
  parameter int BC_ORBIT = BC_PER_ORBIT,
  parameter int DEPTH    = 8
) (
  input  logic      clk,
  input  logic      rst,
  input  trig_msg_t msg,
  input  logic      fee_busy,
  output logic      ttc_a,
  output logic      ttc_b,
  output logic      busy,
  output logic      derand_overflow
);
  logic                  l0, l1, l1_d, orb, cal, push;
  logic [15:0]           ib_cnt;
  logic                  d_busy, d_empty, pop;
  logic [TTCB_MSG_W-1:0] d_out;

  assign l0   = msg.ttype[TT_PHYS] && msg.level[LV_L0];
  assign l1   = msg.ttype[TT_PHYS] && msg.level[LV_L1];
  assign orb  = msg.ttype[TT_ORBIT];
  assign cal  = msg.ttype[TT_CAL];
  assign push = l1;

  always_ff @(posedge clk) begin
    if (rst) begin
      ttc_a  <= 1'b0;
      l1_d   <= 1'b0;
      ib_cnt <= '0;
      busy   <= 1'b0;
    end else begin
      l1_d  <= l1;
      ttc_a <= l0 || l1 || l1_d;
      if (l0)                ib_cnt <= 16'(L0_L1_BC);
      else if (ib_cnt != '0) ib_cnt <= ib_cnt - 16'd1;
      busy <= l0 || (ib_cnt > 16'd1) || d_busy || fee_busy;
    end
  end

  ttc_derandomizer #(.W(TTCB_MSG_W), .DEPTH(DEPTH)) u_derand (
    .clk, .rst,
    .push, .din({msg.orbit, msg.bc, msg.ttype}),
    .pop, .dout(d_out), .empty(d_empty), .busy(d_busy),
    .overflow(derand_overflow), .count()
  );

  ttcb_serializer #(.BC_ORBIT(BC_ORBIT)) u_ser (
    .clk, .rst,
    .orbit_pulse(orb), .cal_req(cal),
    .msg_valid(!d_empty), .msg(d_out), .msg_pop(pop),
    .ttc_b, .frame_busy()
  );
endmodule
