// cluster_logic: trigger clusters of one level and their detectors.
//
// Each trigger class belongs to one of N_CLU clusters (class_cluster). A
// cluster triggers in a BC when any of its classes fired in that BC. Each
// detector receives a trigger when any cluster it is assigned to triggers;
// det_in_cluster[d][c] is the detector-to-cluster assignment register (a
// detector may be in several clusters, a design choice). The module is
// combinational; it is instantiated once per trigger level (LM, L0, L1).
module cluster_logic #(
  parameter int N_CL  = cts_pkg::N_CLASSES,
  parameter int N_CLU = cts_pkg::N_CLUSTERS,
  parameter int N_D   = cts_pkg::N_DET
) (
  input  logic [N_CL-1:0]  fired,
  input  logic [4:0]       class_cluster [N_CL],
  input  logic [N_CLU-1:0] det_in_cluster [N_D],
  output logic [N_CLU-1:0] cluster_trig,
  output logic [N_D-1:0]   det_trig
);
  always_comb begin
    cluster_trig = '0;
    for (int c = 0; c < N_CL; c++)
      if (fired[c] && int'(class_cluster[c]) < N_CLU)
        cluster_trig[class_cluster[c]] = 1'b1;
    for (int d = 0; d < N_D; d++)
      det_trig[d] = |(cluster_trig & det_in_cluster[d]);
  end
endmodule
