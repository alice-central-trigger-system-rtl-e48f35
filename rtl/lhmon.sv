// lhmon: Link Health Monitor for the TTC-PON upstream.
//
// Each upstream transmission from a CRU carries a link counter that grows by
// one per transmission. The receiving side checks every word (valid) against
// the previous one: cnt must equal previous + 1 (modulo 2^CNT_W). The first
// word after reset, or after resync, only loads the reference. ok shows the
// result of the latest check and err_cnt counts failed checks (saturating);
// both are registered, valid the BC after the word. A failed check adopts the
// received value as the new reference, so a counter that jumps costs one
// error, and a single corrupted word two. The counter width (8) is this
// design's choice.
module lhmon #(
  parameter int CNT_W = 8
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             resync,
  input  logic             valid,
  input  logic [CNT_W-1:0] cnt,
  output logic             ok,
  output logic [15:0]      err_cnt
);
  logic [CNT_W-1:0] last;
  logic             have;

  always_ff @(posedge clk) begin
    if (rst || resync) begin
      have    <= 1'b0;
      last    <= '0;
      ok      <= 1'b1;
      if (rst) err_cnt <= '0;
    end else if (valid) begin
      have <= 1'b1;
      last <= cnt;
      if (have) begin
        ok <= (cnt == last + CNT_W'(1));
        if (cnt != last + CNT_W'(1) && err_cnt != 16'hFFFF) err_cnt <= err_cnt + 16'd1;
      end
    end
  end
endmodule
