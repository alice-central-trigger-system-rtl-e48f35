// hb_map_collector: builds the Global HeartBeat Map (GHBmap).
//
// Each CRU acknowledges every HeartBeat frame (HBf) it delivered to its
// readout computer with an HBack flag. Because the CRUs buffer data, an
// acknowledge may come up to DEPTH (8) HBfs after the frame. The collector
// keeps DEPTH maps of N_CRU bits, one per HBf in flight, indexed by the HBf
// number modulo DEPTH (ack_slot). An acknowledge sets bit ack_cru of map
// ack_slot when ack = 1. At each HBf start the write slot advances; the map
// it lands on belongs to the HBf that started DEPTH frames ago, which can no
// longer be acknowledged: it is released on ghbmap (map_valid pulses one BC
// later, with map_slot) and cleared for the new frame. An acknowledge arriving
// in the releasing BC for that slot is included in the released map.
// One acknowledge per BC. Reset clears all maps; the first frame after reset
// uses slot 0, and the first map is released at the start of frame DEPTH.
module hb_map_collector #(
  parameter int N_CRU = cts_pkg::N_CRU,
  parameter int DEPTH = cts_pkg::HB_DEPTH
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     hbf_start,
  input  logic                     ack_valid,
  input  logic [$clog2(N_CRU)-1:0] ack_cru,
  input  logic [$clog2(DEPTH)-1:0] ack_slot,
  input  logic                     ack,
  output logic                     map_valid,
  output logic [$clog2(DEPTH)-1:0] map_slot,
  output logic [N_CRU-1:0]         ghbmap
);
  localparam int SW = $clog2(DEPTH);

  logic [N_CRU-1:0] maps [DEPTH];
  logic [SW-1:0]    cur;
  logic             started;
  int unsigned      filled;    // frames started since reset, up to DEPTH
  logic [SW-1:0]    nxt;
  logic [N_CRU-1:0] ack_bit;

  assign nxt     = started ? cur + SW'(1) : '0;
  assign ack_bit = (ack_valid && ack && int'(ack_cru) < N_CRU) ? (N_CRU'(1) << ack_cru) : '0;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DEPTH; i++) maps[i] <= '0;
      cur       <= '0;
      started   <= 1'b0;
      filled    <= 0;
      map_valid <= 1'b0;
      map_slot  <= '0;
      ghbmap    <= '0;
    end else begin
      map_valid <= 1'b0;
      if (ack_bit != '0) maps[ack_slot] <= maps[ack_slot] | ack_bit;
      if (hbf_start) begin
        started <= 1'b1;
        if (filled < DEPTH) filled <= filled + 1;
        cur     <= nxt;
        maps[nxt] <= '0;
        // A slot is released only once a frame was collected in it.
        if (filled == DEPTH) begin
          map_valid <= 1'b1;
          map_slot  <= nxt;
          ghbmap    <= maps[nxt] | ((ack_slot == nxt) ? ack_bit : '0);
        end
      end
    end
  end
endmodule
