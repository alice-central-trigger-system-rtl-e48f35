// tb_hb_map_collector: short HeartBeat frames of 40 BCs. During each frame,
// acknowledges for the frames still in flight (the current one and up to
// 7 earlier ones) arrive with random CRU ids; the testbench keeps its own map
// per frame. When frame f+8 starts, the released map must be frame f's.
module tb_hb_map_collector;
  localparam int N = 441;
  logic clk = 0, rst = 1;
  logic hbf_start = 0, ack_valid = 0, ack = 0;
  logic [8:0] ack_cru = 0;
  logic [2:0] ack_slot = 0;
  logic map_valid;
  logic [2:0] map_slot;
  logic [N-1:0] ghbmap;
  logic [N-1:0] refmap [64];
  int checks = 0, failures = 0, released = 0, frame = -1;

  hb_map_collector dut (.clk, .rst, .hbf_start, .ack_valid, .ack_cru, .ack_slot, .ack,
    .map_valid, .map_slot, .ghbmap);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // check released maps
  always @(negedge clk) if (!rst && map_valid) begin
    checks++;
    released++;
    if (ghbmap !== refmap[frame - 8] || map_slot !== 3'((frame - 8) % 8)) begin
      failures++;
      $display("FAIL release of frame %0d", frame - 8);
    end
  end

  initial begin
    for (int i = 0; i < 64; i++) refmap[i] = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < 40; f++) begin
      @(negedge clk);
      hbf_start = 1; ack_valid = 0; frame = f;
      @(negedge clk);
      hbf_start = 0;
      for (int t = 1; t < 40; t++) begin
        int tf;
        tf = f - int'($urandom % 8);
        if (tf < 0) tf = f;
        ack_valid = 1;
        ack = ($urandom % 4) != 0;
        ack_cru = 9'($urandom % N);
        ack_slot = 3'(tf % 8);
        if (ack) refmap[tf][ack_cru] = 1'b1;
        @(negedge clk);
      end
      ack_valid = 0;
    end
    @(negedge clk);
    checks++;
    if (released != 32) begin failures++; $display("FAIL released %0d maps", released); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
