// orbit_bc_counter: bunch-crossing and orbit counters of the trigger system.
//
// The BC counter runs 0..BC_PER_ORBIT-1 on the 40.079 MHz bunch-crossing
// clock; it wraps at the end of each LHC orbit, when the 32-bit orbit counter
// advances. Each orbit is one HeartBeat frame (HBf); tf_len HBfs make one Time
// Frame (TF, 128 by default). The module marks the first BC of every orbit
// (orbit_start) and of every TF (tf_start), and gives the HBf index in the TF.
// All outputs are registered and valid in the BC they describe. After a
// synchronous reset the counters start at BC 0 of orbit 0, which begins TF 0
// (reset behaviour is this design's choice). tf_len = 0 is treated as 1.
module orbit_bc_counter #(
  parameter int BC_PER_ORBIT = cts_pkg::BC_PER_ORBIT
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [7:0]  tf_len,
  output logic [11:0] bc,
  output logic [31:0] orbit,
  output logic [7:0]  hbf_in_tf,
  output logic        orbit_start,
  output logic        tf_start
);
  always_ff @(posedge clk) begin
    if (rst) begin
      bc        <= '0;
      orbit     <= '0;
      hbf_in_tf <= '0;
    end else if (bc == 12'(BC_PER_ORBIT - 1)) begin
      bc    <= '0;
      orbit <= orbit + 32'd1;
      if (hbf_in_tf + 8'd1 >= tf_len) hbf_in_tf <= '0;
      else                            hbf_in_tf <= hbf_in_tf + 8'd1;
    end else begin
      bc <= bc + 12'd1;
    end
  end

  assign orbit_start = (bc == '0);
  assign tf_start    = orbit_start && (hbf_in_tf == '0);
endmodule
