// ctp_emulator: CTP emulator inside an LTU, for standalone runs.
//
// In standalone mode an LTU is decoupled from the CTP and must itself produce
// everything the CTP would send its detector: bunch-crossing and orbit
// numbers, a HeartBeat in every orbit, Time Frame starts, HeartBeat rejects,
// physics triggers and start/end of run. The emulator reuses the CTP's
// blocks: orbit_bc_counter, global_trigger_generator (periodic or random
// trigger requests), hbr_generator with one detector (downscale mode:
// n_hbr rejects per TF while the run is on) and trigger_message_builder, so
// its output frame has exactly the CTP's format.
// A physics trigger is requested by the generator; it is accepted as an L0
// when the run is on, the LTU is not busy, the HeartBeat frame is not
// rejected and no earlier trigger waits for its L1. The L1 message follows
// L0_L1_BC BCs later. run rising/falling edges send start/end of run.
// The trigger timing choices are this design's; the system description only
// says the LTU can emulate the presence of the CTP.
// Output frame/msg are registered, one BC after the counters.
module ctp_emulator
  import cts_pkg::*;
#(
  parameter int BC_ORBIT = BC_PER_ORBIT,
  parameter int L0_L1_BC = 224
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic [7:0]            det_id,
  input  logic                  run,
  input  logic                  triggered,
  input  logic [7:0]            tf_len,
  input  logic [7:0]            n_hbr,
  input  logic [31:0]           trig_period,
  input  logic [31:0]           trig_rnd_thr,
  input  logic                  busy_in,
  output trig_msg_t             msg,
  output logic                  msg_valid,
  output logic [PON_USER_W-1:0] frame
);
  logic [11:0]  bc;
  logic [31:0]  orbit;
  logic [7:0]   hbf_in_tf;
  logic         orbit_start, tf_start, hbf_next, tf_next;
  logic [1:0]   gen;
  logic [0:0]   hbr;
  logic         run_d, l0, l1;
  logic [15:0]  wait_cnt;
  hbr_mode_e    mode [1];
  logic [7:0]   nh [1];
  logic [7:0]   thr [1];

  orbit_bc_counter #(.BC_PER_ORBIT(BC_ORBIT)) u_cnt (
    .clk, .rst, .tf_len, .bc, .orbit, .hbf_in_tf, .orbit_start, .tf_start);

  global_trigger_generator u_gen (
    .clk, .rst, .period(trig_period), .rnd_thr(trig_rnd_thr), .gen);

  assign hbf_next = (bc == 12'(BC_ORBIT - 1));
  assign tf_next  = hbf_next && (hbf_in_tf + 8'd1 >= tf_len);
  assign mode[0]  = run ? HBR_DOWNSCALE : HBR_AUTONOMOUS;
  assign nh[0]    = n_hbr;
  assign thr[0]   = '0;

  hbr_generator #(.N_D(1)) u_hbr (
    .clk, .rst, .hbf_next, .tf_next, .tf_len,
    .bs_valid(1'b0), .bs_det('0), .bs('0),
    .mode, .n_hbr(nh), .bs_thr(thr), .hbr);

  assign l0 = run && triggered && (gen != '0) && !busy_in && !hbr[0] && (wait_cnt == '0);
  assign l1 = (wait_cnt == 16'd1);

  always_ff @(posedge clk) begin
    if (rst) begin
      run_d    <= 1'b0;
      wait_cnt <= '0;
    end else begin
      run_d <= run;
      if (l0)                  wait_cnt <= 16'(L0_L1_BC);
      else if (wait_cnt != '0) wait_cnt <= wait_cnt - 16'd1;
    end
  end

  trigger_message_builder u_msg (
    .clk, .rst, .det_id, .triggered,
    .bc, .orbit, .orbit_start, .tf_start, .hbr(hbr[0]),
    .det_lm(1'b0), .det_l0(l0), .det_l1(l1),
    .sot(run && !run_d), .eot(!run && run_d), .cal(1'b0),
    .hbd_valid(1'b0), .hbd(1'b0), .hbd_orbit('0),
    .msg, .msg_valid, .nonidle(), .frame);
endmodule
