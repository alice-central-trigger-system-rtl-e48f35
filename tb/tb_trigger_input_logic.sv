// tb_trigger_input_logic: random inputs, random per-input delays and levels;
// the outputs are compared with a history of the inputs kept in the
// testbench (latency 1 + delay).
module tb_trigger_input_logic;
  localparam int N = 48;
  logic clk = 0, rst = 1;
  logic [N-1:0] inputs = '0, lm_in, l0_in, l1_in;
  logic [3:0] delay [N];
  logic [1:0] level [N];
  logic [N-1:0] hist [64];
  int checks = 0, failures = 0;

  trigger_input_logic dut (.clk, .rst, .inputs, .delay, .level, .lm_in, .l0_in, .l1_in);
  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      delay[i] = 4'($urandom);
      level[i] = 2'($urandom);
    end
    for (int k = 0; k < 64; k++) hist[k] = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      if (t > 20) begin
        for (int i = 0; i < N; i++) begin
          logic e;
          e = hist[delay[i]][i];
          checks++;
          if (lm_in[i] != (level[i] == 0 && e) || l0_in[i] != (level[i] == 1 && e) ||
              l1_in[i] != (level[i] == 2 && e)) begin
            failures++;
            $display("FAIL t=%0d in %0d", t, i);
          end
        end
      end
      for (int k = 63; k > 0; k--) hist[k] = hist[k-1];
      inputs = {$urandom, $urandom};
      hist[0] = inputs;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
