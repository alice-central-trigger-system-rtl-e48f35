// trigger_class: the trigger classes of one trigger level (LM, L0 or L1).
//
// A trigger class ties a trigger condition to a cluster (a group of detectors
// read out together) and is subject to vetoes. For each class c, in every BC:
//   condition = enable
//             & all inputs selected by in_mask are 1 (AND of selected inputs)
//             & all generator bits selected by gen_mask are 1
//             & (BC mask bcm_sel accepts this BC, if bcm_en)
//             & (the same class fired at the previous level, if need_prev)
//   veto      = busy of the class's cluster  OR  downscaling veto
// Cluster busy applies only where a trigger starts: for a class with
// need_prev set, the previous level already accepted the trigger, and the
// busy that acceptance raised (e.g. the LTU's L0-L1 busy) must not kill its
// own L1. This rule is this design's reading of the multi-level scheme.
//   fired     = condition & !veto
// Downscaling passes the first of every downscale+1 candidates (conditions
// met while the cluster is not busy) and vetoes the others; downscale = 0
// passes all. A class with no input and no generator selected never fires.
// The outputs are registered: fired[] is valid one BC after the inputs.
// The AND form of the condition and the counter downscaler are this design's
// choices; the veto as OR of busy and downscaling follows the system
// description. prev_fired must be delayed by the caller to line up with this
// level's inputs. Reset clears the outputs and downscale counters.
module trigger_class
  import cts_pkg::*;
#(
  parameter int N_CL = N_CLASSES,
  parameter int N_IN = N_INPUTS,
  parameter int N_CLU = N_CLUSTERS
) (
  input  logic               clk,
  input  logic               rst,
  input  logic [N_IN-1:0]    level_in,
  input  logic [N_GEN-1:0]   gen,
  input  logic [N_MASKS-1:0] bcmask,
  input  logic [N_CLU-1:0]   cluster_busy,
  input  logic [N_CL-1:0]    prev_fired,
  input  class_cfg_t         cfg [N_CL],
  output logic [N_CL-1:0]    fired
);
  logic [15:0]     ds_cnt [N_CL];
  logic [N_CL-1:0] cond, busy, ds_veto;

  always_comb begin
    for (int c = 0; c < N_CL; c++) begin
      cond[c] = cfg[c].enable
              && ((cfg[c].in_mask[N_IN-1:0] != '0) || (cfg[c].gen_mask != '0))
              && ((level_in & cfg[c].in_mask[N_IN-1:0]) == cfg[c].in_mask[N_IN-1:0])
              && ((gen & cfg[c].gen_mask) == cfg[c].gen_mask)
              && (!cfg[c].bcm_en || bcmask[cfg[c].bcm_sel])
              && (!cfg[c].need_prev || prev_fired[c]);
      busy[c]    = (int'(cfg[c].cluster) >= N_CLU) ||
                   (!cfg[c].need_prev && cluster_busy[cfg[c].cluster]);
      ds_veto[c] = (ds_cnt[c] != 16'd0);
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      fired <= '0;
      for (int c = 0; c < N_CL; c++) ds_cnt[c] <= '0;
    end else begin
      for (int c = 0; c < N_CL; c++) begin
        fired[c] <= cond[c] && !busy[c] && !ds_veto[c];
        if (cond[c] && !busy[c]) begin
          if (ds_cnt[c] >= cfg[c].downscale) ds_cnt[c] <= '0;
          else                               ds_cnt[c] <= ds_cnt[c] + 16'd1;
        end
      end
    end
  end
endmodule
