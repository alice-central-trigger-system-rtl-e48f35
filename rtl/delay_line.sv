// delay_line: fixed delay of a W-bit vector by D clock cycles (D >= 1),
// built as a shift register cleared by reset. The CTP uses it to line up the
// classes fired at one trigger level with the decision time of the next
// level (LM -> L0, L0 -> L1).
module delay_line #(
  parameter int W = 64,
  parameter int D = 10
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [W-1:0] din,
  output logic [W-1:0] dout
);
  logic [W-1:0] sr [D];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < D; i++) sr[i] <= '0;
    end else begin
      sr[0] <= din;
      for (int i = 1; i < D; i++) sr[i] <= sr[i-1];
    end
  end

  assign dout = sr[D-1];
endmodule
