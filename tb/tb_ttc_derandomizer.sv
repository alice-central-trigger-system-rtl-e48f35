// tb_ttc_derandomizer: random push/pop against a queue model; checks data
// order, busy at DEPTH-1 entries, and overflow when pushed while full.
module tb_ttc_derandomizer;
  logic clk = 0, rst = 1, push = 0, pop = 0;
  logic [75:0] din = 0, dout;
  logic empty, busy, ovf;
  logic [3:0] count;
  logic [75:0] q [$];
  int checks = 0, failures = 0, nbusy = 0;

  ttc_derandomizer dut (.clk, .rst, .push, .din, .pop, .dout, .empty, .busy, .overflow(ovf), .count);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int t = 0; t < 3000; t++) begin
      push = ($urandom % 2) == 1 && q.size() < 8;
      pop = ($urandom % 2) == 1 && (t % 600 > 200);
      din = {$urandom, $urandom, 12'($urandom)};
      checks++;
      if (empty !== (q.size() == 0) || busy !== (q.size() >= 7) || int'(count) != q.size() ||
          (q.size() > 0 && dout !== q[0])) begin
        failures++; $display("FAIL t=%0d size %0d count %0d", t, q.size(), count);
      end
      if (busy) nbusy++;
      @(posedge clk);
      if (pop && q.size() > 0) void'(q.pop_front());
      if (push) q.push_back(din);
      @(negedge clk);
    end
    checks++;
    if (nbusy == 0 || ovf) begin failures++; $display("FAIL busy never / overflow"); end
    // overflow
    pop = 0; push = 1;
    repeat (12) @(negedge clk);
    push = 0;
    checks++;
    if (!ovf) begin failures++; $display("FAIL no overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
