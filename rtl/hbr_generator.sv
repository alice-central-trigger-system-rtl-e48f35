// hbr_generator: HeartBeat-reject (HBr) requests per detector.
//
// At the start of each HeartBeat frame (HBf) the CTP tells each detector's
// CRUs whether to keep (HBr = 0) or reject (HBr = 1) the data of that frame.
// Per detector, mode[d] selects one of three uses:
//   HBR_AUTONOMOUS  never reject; the CRUs throttle themselves.
//   HBR_DOWNSCALE   reject n_hbr[d] frames in each Time Frame (TF), spread
//                   evenly by an accumulator: each HBf adds n_hbr, and a frame
//                   is rejected when the sum reaches tf_len (which is then
//                   subtracted); the sum restarts at each TF.
//   HBR_COLLECTIVE  reject when the highest CRU buffer status reported for
//                   the detector during the previous HBf reached bs_thr[d].
// Buffer statuses arrive one per BC (bs_valid, bs_det, bs). hbf_next and
// tf_next must pulse in the last BC before an HBf / TF starts; hbr[] is then
// valid, and held, for the whole new HBf (it also serves as the HBr busy
// window). The accumulator and the max-buffer-status rule are this design's
// choices. Reset clears all state.
module hbr_generator
  import cts_pkg::*;
#(
  parameter int N_D  = N_DET,
  parameter int BS_W = 8
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic                   hbf_next,
  input  logic                   tf_next,
  input  logic [7:0]             tf_len,
  input  logic                   bs_valid,
  input  logic [(N_D > 1 ? $clog2(N_D) : 1)-1:0] bs_det,
  input  logic [BS_W-1:0]        bs,
  input  hbr_mode_e              mode   [N_D],
  input  logic [7:0]             n_hbr  [N_D],
  input  logic [BS_W-1:0]        bs_thr [N_D],
  output logic [N_D-1:0]         hbr
);
  logic [BS_W-1:0] bs_max [N_D];
  logic [8:0]      acc    [N_D];
  logic [8:0]      sum    [N_D];

  always_comb begin
    for (int d = 0; d < N_D; d++)
      sum[d] = (tf_next ? 9'd0 : acc[d]) + {1'b0, n_hbr[d]};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      hbr <= '0;
      for (int d = 0; d < N_D; d++) begin
        bs_max[d] <= '0;
        acc[d]    <= '0;
      end
    end else begin
      for (int d = 0; d < N_D; d++) begin
        if (hbf_next) begin
          bs_max[d] <= '0;
          case (mode[d])
            HBR_DOWNSCALE: begin
              if (sum[d] >= {1'b0, tf_len} && tf_len != 8'd0) begin
                hbr[d] <= 1'b1;
                acc[d] <= sum[d] - {1'b0, tf_len};
              end else begin
                hbr[d] <= 1'b0;
                acc[d] <= sum[d];
              end
            end
            HBR_COLLECTIVE: hbr[d] <= (bs_max[d] >= bs_thr[d]);
            default:        hbr[d] <= 1'b0;
          endcase
        end else if (bs_valid && int'(bs_det) == d && bs > bs_max[d]) begin
          bs_max[d] <= bs;
        end
      end
    end
  end
endmodule
