// record_packer: packs a per-BC record into 80-bit GBT words for the CRU.
//
// The CTP books what happened in every bunch crossing: the Interaction Record
// (the trigger inputs, W = 48) and the trigger class record (the classes that
// fired, W = 64) each travel to a CRU over a GBT link, whose user payload is
// 80 bits per BC. For each BC with a non-zero payload a data word is emitted:
//   bit 79 = 0, bits [75:64] = BC number, bits [W-1:0] = payload
// and at the first BC of every orbit an orbit header word:
//   bit 79 = 1, bits [31:0] = orbit number
// Both may occur in the same BC, so words pass a FIFO of DEPTH entries that
// accepts two words and sends one per BC (header first). The word layout and
// FIFO are this design's choice. Output is registered (word, valid); overflow
// is a sticky flag for a lost word. W may be at most 64.
module record_packer #(
  parameter int W     = cts_pkg::N_INPUTS,
  parameter int DEPTH = 8
) (
  input  logic         clk,
  input  logic         rst,
  input  logic [11:0]  bc,
  input  logic [31:0]  orbit,
  input  logic         orbit_start,
  input  logic [W-1:0] payload,
  output logic [79:0]  word,
  output logic         valid,
  output logic         overflow
);
  localparam int PW = $clog2(DEPTH);

  logic [79:0]   mem [DEPTH];
  logic [PW-1:0] rd, wr;
  logic [PW:0]   count;
  logic [79:0]   hdr, dat;
  logic          has_hdr, has_dat;
  logic [1:0]    npush;
  logic          pop;

  always_comb begin
    hdr          = '0;
    hdr[79]      = 1'b1;
    hdr[31:0]    = orbit;
    dat          = '0;
    dat[75:64]   = bc;
    dat[W-1:0]   = payload;
    has_hdr      = orbit_start;
    has_dat      = (payload != '0);
    npush        = 2'(has_hdr) + 2'(has_dat);
    pop          = (count != '0);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      rd       <= '0;
      wr       <= '0;
      count    <= '0;
      valid    <= 1'b0;
      word     <= '0;
      overflow <= 1'b0;
    end else begin
      valid <= pop;
      if (pop) begin
        word <= mem[rd];
        rd   <= rd + PW'(1);
      end
      if (int'(count) - int'(pop) + int'(npush) > DEPTH) begin
        overflow <= 1'b1;
        count    <= count - (PW+1)'(pop);
      end else begin
        if (has_hdr) mem[wr] <= hdr;
        if (has_dat) mem[has_hdr ? wr + PW'(1) : wr] <= dat;
        wr    <= wr + PW'(npush);
        count <= count - (PW+1)'(pop) + (PW+1)'(npush);
      end
    end
  end
endmodule
