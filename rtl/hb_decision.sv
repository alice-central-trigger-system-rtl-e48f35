// hb_decision: HeartBeat decision per detector.
//
// For every completed Global HeartBeat Map the CTP decides, separately for
// each detector, whether the HeartBeat frame is kept (HBd = 1) or dropped:
//     HBd[d] = f_d(GHBmap AND HBmask[d])
// HBmask[d] selects the CRUs whose acknowledges matter to detector d; using
// the same mask and function for all detectors makes the experiment read out
// as one, different ones let detectors work independently. Two functions f
// are offered per detector (func[d]): 0 = ALL, every masked CRU acknowledged;
// 1 = ANY, at least one did. The choice of these two functions is this
// design's; the masked-AND form follows the system description. Decisions
// are registered: hbd_valid follows map_valid by one BC.
module hb_decision #(
  parameter int N_CRU = cts_pkg::N_CRU,
  parameter int N_D   = cts_pkg::N_DET
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             map_valid,
  input  logic [N_CRU-1:0] ghbmap,
  input  logic [N_CRU-1:0] hbmask [N_D],
  input  logic [N_D-1:0]   func,
  output logic             hbd_valid,
  output logic [N_D-1:0]   hbd
);
  always_ff @(posedge clk) begin
    if (rst) begin
      hbd_valid <= 1'b0;
      hbd       <= '0;
    end else begin
      hbd_valid <= map_valid;
      if (map_valid)
        for (int d = 0; d < N_D; d++)
          hbd[d] <= func[d] ? |(ghbmap & hbmask[d])
                            : ((ghbmap & hbmask[d]) == hbmask[d]);
    end
  end
endmodule
