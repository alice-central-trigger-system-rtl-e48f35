// tb_olt_mux: two detectors share an OLT. Frames are tagged with their input
// and a sequence number. Checked: every non-idle frame comes out exactly once,
// in order per input, none is lost at the offered load, with only one BC of
// latency when there is no contention; an overload sets overflow.
module tb_olt_mux;
  logic clk = 0, rst = 1;
  logic [199:0] fin [2];
  logic [1:0] nin = 0;
  logic [199:0] fout;
  logic ovf;
  int checks = 0, failures = 0, seq [2], rx [2], maxlat = 0;

  olt_mux dut (.clk, .rst, .frame_in(fin), .nonidle_in(nin), .frame_out(fout), .overflow(ovf));
  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // frame: [199] nonidle, [198] input, [197:166] seq, [165:134] send time
  logic chk_seq = 1;
  always @(negedge clk) if (!rst && chk_seq && fout[199]) begin
    int i, s;
    i = int'(fout[198]); s = int'(fout[197:166]);
    checks++;
    if (s != rx[i]) begin failures++; $display("FAIL input %0d got seq %0d exp %0d at %0t", i, s, rx[i], $time); end
    rx[i] = s + 1;
    if (int'($time / 10) - int'(fout[165:134]) > maxlat) maxlat = int'($time / 10) - int'(fout[165:134]);
  end

  initial begin
    seq[0] = 0; seq[1] = 0; rx[0] = 0; rx[1] = 0;
    fin[0] = '0; fin[1] = '0;
    repeat (2) @(posedge clk);
    rst <= 0;
    // phase 1: one input at a time, latency 1
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      for (int i = 0; i < 2; i++) begin
        nin[i] = (t % 4 == 2 * i) ? 1'b1 : 1'b0;
        fin[i] = '0;
        fin[i][87:80] = 8'(i);
        if (nin[i]) begin
          fin[i][199] = 1; fin[i][198] = 1'(i); fin[i][197:166] = 32'(seq[i]);
          fin[i][165:134] = 32'($time / 10); seq[i]++;
        end
      end
    end
    @(negedge clk); nin = 0; fin[0] = '0; fin[1] = '0; repeat (8) @(negedge clk);
    checks++;
    if (maxlat != 1) begin failures++; $display("FAIL latency %0d", maxlat); end
    // phase 2: both inputs busy, each at most every other BC (total load up to
    // one frame per BC), so the FIFOs must absorb all collisions
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int i = 0; i < 2; i++) begin
        nin[i] = ($urandom % 10) < 8 && !nin[i];
        fin[i] = '0;
        if (nin[i]) begin
          fin[i][199] = 1; fin[i][198] = 1'(i); fin[i][197:166] = 32'(seq[i]);
          fin[i][165:134] = 32'($time / 10); seq[i]++;
        end
      end
    end
    @(negedge clk); nin = 0; fin[0] = '0; fin[1] = '0; repeat (20) @(negedge clk);
    checks++;
    if (rx[0] != seq[0] || rx[1] != seq[1] || ovf) begin failures++; $display("FAIL lost frames"); end
    // phase 3: overload
    chk_seq = 0;
    nin = 2'b11;
    repeat (30) @(negedge clk);
    nin = 0;
    checks++;
    if (!ovf) begin failures++; $display("FAIL no overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
