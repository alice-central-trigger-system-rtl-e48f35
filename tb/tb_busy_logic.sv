// tb_busy_logic: random busy, HBr, trigger and assignment patterns. The
// reference keeps, per detector, the last BC covered by the CTP dead time
// (a trigger sent in BC k covers BCs k+1 .. k+DEAD); the registered cluster
// busy in BC c must equal the OR over member detectors of
// (busy | HBr | trigger sent in BC c-1 | c inside the dead time). Short dead
// times (7 after LM, 4 after L0) make overlapping triggers common.
module tb_busy_logic;
  localparam int DLM = 7, DL0 = 4;
  logic clk = 0, rst = 1;
  logic [17:0] db, dh, dlm, dl0, cb, ecb;
  logic [17:0] dic [18];
  int last_dead [18];
  int checks = 0, failures = 0, n_dead = 0;

  busy_logic #(.DEAD_LM(DLM), .DEAD_L0(DL0)) dut (.clk, .rst, .det_busy(db), .det_hbr(dh),
    .det_lm(dlm), .det_l0(dl0), .det_in_cluster(dic), .cluster_busy(cb));
  always #5 clk = ~clk;

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    db = '0; dh = '0; dlm = '0; dl0 = '0;
    for (int d = 0; d < 18; d++) begin dic[d] = 18'(1 << d); last_dead[d] = -1; end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int c = 0; c < 2000; c++) begin
      @(negedge clk);
      // check the busy that results from the previous BC's inputs
      if (c > 0) begin
        checks++;
        if (cb !== ecb) begin failures++; $display("FAIL c=%0d %h %h", c, cb, ecb); end
      end
      if (c % 200 == 0)
        for (int d = 0; d < 18; d++) dic[d] = 18'(1 << ($urandom % 18)) | 18'(1 << ($urandom % 18));
      db  = 18'($urandom) & 18'($urandom) & 18'($urandom);
      dh  = 18'($urandom) & 18'($urandom) & 18'($urandom) & 18'($urandom);
      dlm = 18'($urandom) & 18'($urandom) & 18'($urandom) & 18'($urandom);
      dl0 = 18'($urandom) & 18'($urandom) & 18'($urandom) & 18'($urandom);
      // reference for BC c+1
      ecb = '0;
      for (int d = 0; d < 18; d++) begin
        if (dlm[d] && last_dead[d] < c + DLM) last_dead[d] = c + DLM;
        if (dl0[d] && last_dead[d] < c + DL0) last_dead[d] = c + DL0;
        if (db[d] || dh[d] || last_dead[d] >= c + 1) ecb = ecb | dic[d];
        if (!db[d] && !dh[d] && !dlm[d] && !dl0[d] && last_dead[d] >= c + 1) n_dead++;
      end
    end
    checks++;
    if (n_dead < 100) begin failures++; $display("FAIL dead time rarely exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
