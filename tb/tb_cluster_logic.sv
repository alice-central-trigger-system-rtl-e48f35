// tb_cluster_logic: random class-to-cluster and detector-to-cluster
// assignments and random fired vectors; cluster and detector triggers are
// compared with a loop-based reference.
module tb_cluster_logic;
  logic [63:0] fired;
  logic [4:0] cc [64];
  logic [17:0] dic [18];
  logic [17:0] ct, dt, ect, edt;
  int checks = 0, failures = 0;

  cluster_logic dut (.fired, .class_cluster(cc), .det_in_cluster(dic), .cluster_trig(ct), .det_trig(dt));

  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int c = 0; c < 64; c++) cc[c] = 5'($urandom % 18);
      for (int d = 0; d < 18; d++) dic[d] = 18'(1 << ($urandom % 18)) | ((it % 2) ? 18'($urandom) : 18'd0);
      fired = {$urandom, $urandom} & {$urandom, $urandom} & {$urandom, $urandom};
      #1;
      ect = '0;
      for (int c = 0; c < 64; c++) if (fired[c]) ect[cc[c]] = 1'b1;
      for (int d = 0; d < 18; d++) begin
        edt[d] = 1'b0;
        for (int k = 0; k < 18; k++) if (dic[d][k] && ect[k]) edt[d] = 1'b1;
      end
      checks++;
      if (ct !== ect || dt !== edt) begin
        failures++;
        $display("FAIL it=%0d ct %h/%h dt %h/%h", it, ct, ect, dt, edt);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
