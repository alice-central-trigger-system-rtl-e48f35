// tb_bc_mask: loads random masks into all 3564 slots, then sweeps the BC
// address and compares every read with the testbench's copy.
module tb_bc_mask;
  logic clk = 0;
  logic [11:0] bc = 0, waddr = 0;
  logic we = 0;
  logic [3:0] wdata = 0, mask;
  logic [3:0] ref_m [3564];
  int checks = 0, failures = 0;

  bc_mask dut (.clk, .bc, .we, .waddr, .wdata, .mask);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3564; i++) begin
      ref_m[i] = 4'($urandom);
      @(negedge clk); we = 1; waddr = 12'(i); wdata = ref_m[i];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 3564; i++) begin
      bc = 12'(i); #1;
      checks++;
      if (mask !== ref_m[i]) begin failures++; $display("FAIL bc %0d", i); end
    end
    // a rewrite of one slot takes effect
    @(negedge clk); we = 1; waddr = 12'd100; wdata = ~ref_m[100];
    @(negedge clk); we = 0; bc = 12'd100; #1;
    checks++; if (mask !== ~ref_m[100]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
