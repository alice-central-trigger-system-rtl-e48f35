// bc_mask: bunch-crossing mask memory.
//
// Of the 3564 BC slots of an orbit only some hold colliding bunches. The
// memory keeps N_MASKS independent masks: bit m of slot b says whether mask m
// accepts BC b. A trigger class may select one mask to gate its condition.
// The masks are written one slot at a time through the configuration port
// (we/waddr/wdata, one cycle per write) and read combinationally at the
// current BC, so mask[] belongs to the same BC as bc. The number of masks
// (4) is this design's choice. The memory has no reset: the control
// software loads all slots before a run.
module bc_mask #(
  parameter int BC_PER_ORBIT = cts_pkg::BC_PER_ORBIT,
  parameter int N_MASKS      = cts_pkg::N_MASKS
) (
  input  logic               clk,
  input  logic [11:0]        bc,
  input  logic               we,
  input  logic [11:0]        waddr,
  input  logic [N_MASKS-1:0] wdata,
  output logic [N_MASKS-1:0] mask
);
  logic [N_MASKS-1:0] mem [BC_PER_ORBIT];

  always_ff @(posedge clk) begin
    if (we && (waddr < 12'(BC_PER_ORBIT))) mem[waddr] <= wdata;
  end

  always_comb begin
    if (bc < 12'(BC_PER_ORBIT)) mask = mem[bc];
    else                        mask = '0;
  end
endmodule
