// tb_global_trigger_generator: the periodic output must pulse exactly every
// 'period' BCs; the random output's rate must match rnd_thr / 2^32 within a
// statistical margin; both must stay silent when switched off.
module tb_global_trigger_generator;
  logic clk = 0, rst = 1;
  logic [31:0] period, thr;
  logic [1:0] gen;
  int checks = 0, failures = 0;

  global_trigger_generator dut (.clk, .rst, .period, .rnd_thr(thr), .gen);
  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last, n, nr;
    period = 32'd37; thr = 32'h2000_0000;   // 1/8 per BC
    repeat (2) @(posedge clk);
    rst <= 0;
    last = -1; n = 0; nr = 0;
    for (int t = 0; t < 40000; t++) begin
      @(negedge clk);
      if (gen[0]) begin
        if (last >= 0) chk(t - last == 37, "period");
        last = t; n++;
      end
      if (gen[1]) nr++;
    end
    chk(n > 1000, "periodic count");
    chk(nr > 4500 && nr < 5500, $sformatf("random rate %0d of 40000", nr));
    period = 0; thr = 0;
    repeat (2) @(posedge clk);
    n = 0;
    repeat (1000) begin @(negedge clk); if (gen != 0) n++; end
    chk(n == 0, "off");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
