// tb_orbit_bc_counter: checks the BC/orbit/TF counters against a reference
// model kept in the testbench, with a short orbit (20 BCs) and tf_len = 3,
// then once at the full 3564-BC orbit: an orbit must last exactly 3564 BCs.
module tb_orbit_bc_counter;
  logic clk = 0, rst = 1;
  logic [7:0] tf_len = 8'd3;
  logic [11:0] bc, bc2;
  logic [31:0] orbit, orbit2;
  logic [7:0] hbf, hbf2;
  logic os, ts, os2, ts2;
  int checks = 0, failures = 0;

  orbit_bc_counter #(.BC_PER_ORBIT(20)) dut (.clk, .rst, .tf_len, .bc, .orbit,
    .hbf_in_tf(hbf), .orbit_start(os), .tf_start(ts));
  orbit_bc_counter dut_full (.clk, .rst, .tf_len, .bc(bc2), .orbit(orbit2),
    .hbf_in_tf(hbf2), .orbit_start(os2), .tf_start(ts2));

  always #5 clk = ~clk;

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int ebc, eorb, ehbf, last_os2, n;
    repeat (2) @(posedge clk);
    rst <= 0;
    ebc = 0; eorb = 0; ehbf = 0;
    for (int i = 0; i < 130; i++) begin
      @(negedge clk);
      chk(bc == 12'(ebc) && orbit == 32'(eorb) && hbf == 8'(ehbf), $sformatf("count at %0d", i));
      chk(os == (ebc == 0) && ts == (ebc == 0 && ehbf == 0), "start flags");
      @(posedge clk);
      if (ebc == 19) begin ebc = 0; eorb++; ehbf = (ehbf + 1) % 3; end else ebc++;
    end
    // full-size orbit length
    last_os2 = -1; n = 0;
    while (n < 2) begin
      @(negedge clk);
      if (os2) begin
        if (last_os2 >= 0) chk($time / 10 - last_os2 == 3564, "orbit lasts 3564 BCs");
        last_os2 = int'($time / 10); n++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
