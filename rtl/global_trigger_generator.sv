// global_trigger_generator: emulated trigger source for the class logic.
//
// Two outputs, usable in any class condition like a trigger input:
//   gen[0] periodic: one pulse every 'period' BCs (period = 0 switches it off)
//   gen[1] random:   a 32-bit Galois LFSR advances every BC and the output is
//                    1 when its value is below rnd_thr, i.e. with probability
//                    rnd_thr / 2^32 per BC (rnd_thr = 0 switches it off).
// Outputs are registered. Reset restarts the period counter and seeds the
// LFSR. The generator is only named in the CTP block diagram; the periodic
// and random modes are this design's choice (the LTU's emulator offers the
// same kinds of trigger).
module global_trigger_generator #(
  parameter logic [31:0] SEED = 32'hACE1_2468
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [31:0] period,
  input  logic [31:0] rnd_thr,
  output logic [1:0]  gen
);
  logic [31:0] cnt;
  logic [31:0] lfsr;

  always_ff @(posedge clk) begin
    if (rst) begin
      cnt  <= '0;
      lfsr <= SEED;
      gen  <= '0;
    end else begin
      // x^32 + x^22 + x^2 + x + 1
      lfsr <= {1'b0, lfsr[31:1]} ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
      gen[1] <= (rnd_thr != 0) && (lfsr < rnd_thr);
      if (period == 0) begin
        cnt    <= '0;
        gen[0] <= 1'b0;
      end else if (cnt + 32'd1 >= period) begin
        cnt    <= '0;
        gen[0] <= 1'b1;
      end else begin
        cnt    <= cnt + 32'd1;
        gen[0] <= 1'b0;
      end
    end
  end
endmodule
