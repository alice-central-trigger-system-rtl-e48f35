// busy_logic: cluster busy for the trigger classes.
//
// A cluster is busy when any of its detectors is busy. A detector is busy
//   - while it (or its LTU) raises BUSY;
//   - while it is inside a HeartBeat-reject (HBr) window, during which no
//     triggers may be sent to it;
//   - during the CTP's own dead time after a trigger sent to it: from the BC
//     in which an LM (or an L0) leaves the class logic, for DEAD_LM (DEAD_L0)
//     BCs. The default covers the LM-to-L1 latency plus the time the LTU's
//     BUSY takes to come back (BUSY_RTT = 10 BCs), so the LTU's own busy,
//     raised on that trigger, has taken over when the dead time ends. Without
//     it, further LMs could be accepted during the busy round trip and
//     overflow the LTU's TTC derandomizer.
// The result vetoes every class of the cluster. cluster_busy is registered:
// a trigger sent in BC k makes its cluster busy for triggers evaluated from
// BC k+1 on. The HBr and BUSY terms follow the system description ("the
// busy is treated on the CTP/LTU side"); placing the dead time here, its
// length and the one-BC register are this design's choices.
module busy_logic #(
  parameter int N_D     = cts_pkg::N_DET,
  parameter int N_CLU   = cts_pkg::N_CLUSTERS,
  parameter int DEAD_LM = 10 + 224 + 10,
  parameter int DEAD_L0 = 224 + 10
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [N_D-1:0]   det_busy,
  input  logic [N_D-1:0]   det_hbr,
  input  logic [N_D-1:0]   det_lm,
  input  logic [N_D-1:0]   det_l0,
  input  logic [N_CLU-1:0] det_in_cluster [N_D],
  output logic [N_CLU-1:0] cluster_busy
);
  logic [15:0]      dead [N_D];
  logic [N_CLU-1:0] nxt;

  always_comb begin
    nxt = '0;
    for (int d = 0; d < N_D; d++)
      if (det_busy[d] || det_hbr[d] || det_lm[d] || det_l0[d] || dead[d] > 16'd1)
        nxt = nxt | det_in_cluster[d];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      cluster_busy <= '0;
      for (int d = 0; d < N_D; d++) dead[d] <= '0;
    end else begin
      cluster_busy <= nxt;
      for (int d = 0; d < N_D; d++) begin
        logic [15:0] v;
        v = (dead[d] != '0) ? dead[d] - 16'd1 : '0;
        if (det_lm[d] && v < 16'(DEAD_LM)) v = 16'(DEAD_LM);
        if (det_l0[d] && v < 16'(DEAD_L0)) v = 16'(DEAD_L0);
        dead[d] <= v;
      end
    end
  end
endmodule
