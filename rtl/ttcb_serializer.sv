// ttcb_serializer: RD12 TTC channel B transmitter (one bit per BC).
//
// Channel B carries two kinds of frames, sent most significant bit first,
// with the line idle at 1:
//   long word, 42 bits:  0, 1, addr[13:0], E=1, 1, subaddr[7:0], data[7:0],
//                        hamming[6:0], 1
//   broadcast, 16 bits:  0, 0, cmd[7:0], hamming[4:0], 1
// The frame sizes come from the system description; the field layout follows
// the RD12 TTC receiver convention and the Hamming code is this design's own
// SEC-DED code (cts_pkg::ham32 / ham8). Of a long word's 16 user bits, 4 are
// a header (the word number 1..7) and 12 carry data, so a 76-bit trigger
// message (the 80-bit message without its level field) is sent as 7 words,
// bits [11:0] first; 7 x 42 = 294 BCs, about 136 kHz of messages at most.
// Broadcasts: at every orbit (orbit_pulse) an orbit broadcast, cmd = 8'h01
// (bunch-counter reset), and on request a calibration broadcast, cmd = 8'h04.
// The orbit broadcast must go out in its own BC, so a long word is only
// started when it will end GUARD BCs before the next expected orbit (and a
// calibration broadcast likewise); this
// re-synchronisation of the otherwise asynchronous channel follows the
// system description, the guard band is this design's choice. An orbit pulse
// that still meets a frame in progress waits for its end; this happens only
// before the first orbit pulse after reset, while the orbit phase is unknown.
// Handshake: msg_valid/msg hold the oldest message; msg_pop pulses for one
// cycle when its seventh word starts, after which msg may change.
module ttcb_serializer
  import cts_pkg::*;
#(
  parameter int          BC_ORBIT = BC_PER_ORBIT,
  parameter int          GUARD    = 4,
  parameter logic [13:0] ADDR     = 14'h0
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  orbit_pulse,
  input  logic                  cal_req,
  input  logic                  msg_valid,
  input  logic [TTCB_MSG_W-1:0] msg,
  output logic                  msg_pop,
  output logic                  ttc_b,
  output logic                  frame_busy
);
  logic [41:0] sh;
  logic [5:0]  left;       // bits still to send
  logic [2:0]  word;       // next word of the current message
  logic        orbit_pend, cal_pend;
  logic [11:0] since;      // BCs since the last orbit pulse
  logic [83:0] mpad;
  logic [11:0] chunk;
  logic [31:0] lpay;
  logic        can_long, can_short;

  assign mpad     = {8'h00, msg};
  assign chunk    = mpad[12*word +: 12];
  assign lpay     = {ADDR, 1'b1, 1'b1, {1'b0, word + 3'd1}, chunk};
  assign can_long  = (int'(since) + 42 + GUARD <= BC_ORBIT);
  assign can_short = (int'(since) + 16 + GUARD <= BC_ORBIT);
  assign frame_busy = (left != '0);

  function automatic logic [41:0] long_word(input logic [31:0] p);
    return {2'b01, p, ham32(p), 1'b1};
  endfunction

  function automatic logic [41:0] short_word(input logic [7:0] c);
    return {2'b00, c, ham8(c), 1'b1, 26'h3FF_FFFF};
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      sh         <= '1;
      left       <= '0;
      word       <= '0;
      orbit_pend <= 1'b0;
      cal_pend   <= 1'b0;
      since      <= '0;
      msg_pop    <= 1'b0;
      ttc_b      <= 1'b1;
    end else begin
      msg_pop <= 1'b0;
      since   <= orbit_pulse ? 12'd0 : (since == 12'hFFF ? since : since + 12'd1);
      if (cal_req) cal_pend <= 1'b1;
      if (left != '0) begin
        ttc_b <= sh[41];
        sh    <= {sh[40:0], 1'b1};
        left  <= left - 6'd1;
        if (orbit_pulse) orbit_pend <= 1'b1;
      end else if (orbit_pulse || orbit_pend) begin
        orbit_pend <= 1'b0;
        ttc_b <= 1'b0;                    // start bit goes out now
        sh    <= short_word(8'h01) << 1;
        left  <= 6'd15;
      end else if ((cal_pend || cal_req) && can_short) begin
        cal_pend <= 1'b0;
        ttc_b <= 1'b0;
        sh    <= short_word(8'h04) << 1;
        left  <= 6'd15;
      end else if (msg_valid && can_long) begin
        ttc_b <= 1'b0;
        sh    <= long_word(lpay) << 1;
        left  <= 6'd41;
        if (word == 3'd6) begin
          word    <= '0;
          msg_pop <= 1'b1;
        end else begin
          word <= word + 3'd1;
        end
      end else begin
        ttc_b <= 1'b1;
      end
    end
  end
endmodule
