// ttc_derandomizer: buffer between random triggers and the slow TTC-B channel.
//
// Accepted triggers arrive at random times, but each message needs about
// 294 BCs on TTC-B. The derandomizer is a FIFO of DEPTH messages of W bits.
// busy is raised when DEPTH-1 entries are used, one short of full, so that a
// trigger that was already accepted at L0 before busy reached the CTP can
// still be stored at L1 (this margin and the depth of 8 are this design's
// choices; raising busy when the buffer fills follows the system
// description). push and pop act at the clock edge; dout shows the oldest
// entry while empty = 0. A push into a full FIFO is dropped and sets the
// sticky overflow flag. Reset empties the FIFO.
module ttc_derandomizer #(
  parameter int W     = cts_pkg::TTCB_MSG_W,
  parameter int DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         empty,
  output logic         busy,
  output logic         overflow,
  output logic [$clog2(DEPTH):0] count
);
  localparam int PW = $clog2(DEPTH);

  logic [W-1:0]  mem [DEPTH];
  logic [PW-1:0] rd, wr;
  logic          do_push, do_pop;

  assign empty   = (count == '0);
  assign busy    = (int'(count) >= DEPTH - 1);
  assign dout    = mem[rd];
  assign do_pop  = pop && !empty;
  assign do_push = push && (int'(count) < DEPTH || do_pop);

  always_ff @(posedge clk) begin
    if (rst) begin
      rd       <= '0;
      wr       <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (push && !do_push) overflow <= 1'b1;
      if (do_push) begin
        mem[wr] <= din;
        wr      <= wr + PW'(1);
      end
      if (do_pop) rd <= rd + PW'(1);
      count <= count + (PW+1)'(do_push) - (PW+1)'(do_pop);
    end
  end
endmodule
