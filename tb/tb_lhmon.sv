// tb_lhmon: a counter sequence with gaps of random length and injected jumps;
// the error count must equal the number of injected jumps.
module tb_lhmon;
  logic clk = 0, rst = 1, valid = 0;
  logic [7:0] cnt = 0;
  logic ok;
  logic [15:0] err;
  int checks = 0, failures = 0, inj = 0;

  lhmon dut (.clk, .rst, .resync(1'b0), .valid, .cnt, .ok, .err_cnt(err));
  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    logic [7:0] c;
    logic bad;
    c = 8'd200;
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int t = 0; t < 3000; t++) begin
      valid = ($urandom % 3) != 0;
      bad = 0;
      if (valid) begin
        if (t > 0 && ($urandom % 50) == 0) begin c = c + 8'd3; inj++; bad = 1; end
        cnt = c;
        c = c + 8'd1;
      end
      @(negedge clk);
      if (valid && t > 0) begin
        checks++;
        if (ok !== !bad) begin failures++; $display("FAIL t=%0d ok=%b", t, ok); end
      end
    end
    valid = 0;
    @(negedge clk);
    checks++;
    if (int'(err) != inj || inj == 0) begin failures++; $display("FAIL err %0d inj %0d", err, inj); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
