// tb_hb_decision: random GHBmaps (mostly ones, so ALL sometimes holds),
// random masks and functions; decisions compared with a bit-loop reference.
module tb_hb_decision;
  localparam int N = 441;
  logic clk = 0, rst = 1, mv = 0, hv;
  logic [N-1:0] map;
  logic [N-1:0] mask [18];
  logic [17:0] func, hbd, ehbd;
  int checks = 0, failures = 0, nall = 0, nany = 0;

  hb_decision dut (.clk, .rst, .map_valid(mv), .ghbmap(map), .hbmask(mask), .func, .hbd_valid(hv), .hbd);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int it = 0; it < 300; it++) begin
      int nk, bi;
      @(negedge clk);
      for (int i = 0; i < N; i++) map[i] = ($urandom % 64) != 0;
      for (int d = 0; d < 18; d++) begin
        mask[d] = '0;
        nk = 1 + int'($urandom % 12);
        for (int k = 0; k < nk; k++) begin
          bi = int'($urandom % N);
          mask[d][bi] = 1'b1;
        end
        if (it % 3 == 0) for (int i = 0; i < N; i++) mask[d][i] = mask[d][i] & map[i];
      end
      func = 18'($urandom);
      for (int d = 0; d < 18; d++) begin
        logic all1, any1;
        all1 = 1; any1 = 0;
        for (int i = 0; i < N; i++) if (mask[d][i]) begin
          if (map[i]) any1 = 1; else all1 = 0;
        end
        ehbd[d] = func[d] ? any1 : all1;
        if (!func[d] && all1) nall++;
        if (func[d] && !any1) nany++;
      end
      mv = 1;
      @(negedge clk);
      mv = 0;
      checks++;
      if (!hv || hbd !== ehbd) begin failures++; $display("FAIL it=%0d %h %h", it, hbd, ehbd); end
    end
    checks++;
    if (nall == 0) begin failures++; $display("FAIL no ALL decision was 1"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
