// olt_mux: shares one TTC-PON OLT transmitter between several detectors.
//
// An OLT sends one 200-bit user frame per BC, but serves DET_PER_OLT LTUs
// (two by default: 9 OLTs for 18 LTUs). Each BC every input whose frame is
// non-idle (a trigger message or a decision record) is sent in the next BC
// when all FIFOs are empty (the first non-idle input in round-robin order);
// otherwise it waits in its input's FIFO of FIFO_DEPTH frames. Waiting frames
// go first, the head of the first non-empty FIFO in round-robin order. When
// nothing is non-idle, the idle frame of the input whose turn it is goes out,
// so every LTU keeps seeing its BC and orbit. A frame carries its destination detector in byte 10 (bits
// 87:80) and its own BC/orbit stamp, so a frame delayed by a BC or two still
// identifies its bunch crossing. overflow is a sticky flag set when a frame
// had to be dropped. Latency is one BC when no frames compete. The
// arbitration and FIFOs are this design's choice; the block diagram shows
// the MUX only as a block.
module olt_mux #(
  parameter int DET_PER_OLT = 2,
  parameter int FIFO_DEPTH  = 4,
  parameter int FW          = cts_pkg::PON_USER_W
) (
  input  logic                   clk,
  input  logic                   rst,
  input  logic [FW-1:0]          frame_in [DET_PER_OLT],
  input  logic [DET_PER_OLT-1:0] nonidle_in,
  output logic [FW-1:0]          frame_out,
  output logic                   overflow
);
  localparam int PW = $clog2(FIFO_DEPTH);
  localparam int IW = (DET_PER_OLT > 1) ? $clog2(DET_PER_OLT) : 1;

  logic [FW-1:0] mem   [DET_PER_OLT][FIFO_DEPTH];
  logic [PW-1:0] rd    [DET_PER_OLT];
  logic [PW-1:0] wr    [DET_PER_OLT];
  logic [PW:0]   count [DET_PER_OLT];
  logic [IW-1:0] rr;
  logic [IW-1:0] sel;
  logic          sel_ok;
  logic [IW-1:0] byp;
  logic          byp_ok;

  // First non-empty FIFO at or after the round-robin pointer.
  always_comb begin
    sel    = rr;
    sel_ok = 1'b0;
    for (int k = DET_PER_OLT - 1; k >= 0; k--) begin
      if (count[(int'(rr) + k) % DET_PER_OLT] != '0) begin
        sel    = IW'((int'(rr) + k) % DET_PER_OLT);
        sel_ok = 1'b1;
      end
    end
    // With all FIFOs empty, a non-idle input frame goes straight out.
    byp    = rr;
    byp_ok = 1'b0;
    for (int k = DET_PER_OLT - 1; k >= 0; k--) begin
      if (nonidle_in[(int'(rr) + k) % DET_PER_OLT]) begin
        byp    = IW'((int'(rr) + k) % DET_PER_OLT);
        byp_ok = !sel_ok;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < DET_PER_OLT; i++) begin
        rd[i]    <= '0;
        wr[i]    <= '0;
        count[i] <= '0;
      end
      rr        <= '0;
      frame_out <= '0;
      overflow  <= 1'b0;
    end else begin
      rr <= (int'(rr) == DET_PER_OLT - 1) ? '0 : rr + IW'(1);
      if (sel_ok)      frame_out <= mem[sel][rd[sel]];
      else if (byp_ok) frame_out <= frame_in[byp];
      else             frame_out <= frame_in[rr];
      for (int i = 0; i < DET_PER_OLT; i++) begin
        logic push, pop;
        pop  = sel_ok && (int'(sel) == i);
        push = nonidle_in[i] && !(byp_ok && int'(byp) == i) &&
               (count[i] != (PW+1)'(FIFO_DEPTH) || pop);
        if (nonidle_in[i] && !(byp_ok && int'(byp) == i) && !push) overflow <= 1'b1;
        if (push) begin
          mem[i][wr[i]] <= frame_in[i];
          wr[i] <= wr[i] + PW'(1);
        end
        if (pop) rd[i] <= rd[i] + PW'(1);
        count[i] <= count[i] + (PW+1)'(push) - (PW+1)'(pop);
      end
    end
  end
endmodule
