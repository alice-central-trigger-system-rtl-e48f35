// trigger_input_logic: alignment and level sorting of the CTP trigger inputs.
//
// Detectors deliver trigger inputs with different latencies (the LM inputs
// of the FIT detectors at about 425 ns, L0 inputs at about 850-900 ns, L1
// inputs at about 6.1 us). Each input is first registered, then delayed by a
// programmable 0..MAX_DELAY-1 BCs so that all inputs of one level arrive in
// the same BC, and then routed to the LM, L0 or L1 class logic according to
// its level register (0 = LM, 1 = L0, 2 = L1, 3 = disabled). Latency is
// 1 + delay[i] BCs. The delay-line alignment and its depth are this design's
// choices; the system description gives only the inputs and their levels. Reset clears
// the delay lines.
module trigger_input_logic #(
  parameter int N_IN      = cts_pkg::N_INPUTS,
  parameter int MAX_DELAY = 16
) (
  input  logic                         clk,
  input  logic                         rst,
  input  logic [N_IN-1:0]              inputs,
  input  logic [$clog2(MAX_DELAY)-1:0] delay [N_IN],
  input  logic [1:0]                   level [N_IN],
  output logic [N_IN-1:0]              lm_in,
  output logic [N_IN-1:0]              l0_in,
  output logic [N_IN-1:0]              l1_in
);
  logic [MAX_DELAY-1:0] line [N_IN];

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_IN; i++) begin
      if (rst) line[i] <= '0;
      else     line[i] <= {line[i][MAX_DELAY-2:0], inputs[i]};
    end
  end

  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      lm_in[i] = (level[i] == 2'd0) && line[i][delay[i]];
      l0_in[i] = (level[i] == 2'd1) && line[i][delay[i]];
      l1_in[i] = (level[i] == 2'd2) && line[i][delay[i]];
    end
  end
endmodule
