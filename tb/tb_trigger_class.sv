// tb_trigger_class: 64 classes with random conditions (few inputs each, so
// they fire often), random BC-mask use, previous-level requirement, cluster
// and downscaling; random inputs and cluster busy. A reference model in the
// testbench predicts fired[] (one BC later) including the downscale counters.
module tb_trigger_class;
  import cts_pkg::*;
  logic clk = 0, rst = 1;
  logic [47:0] lin = '0;
  logic [1:0] gen = '0;
  logic [3:0] bcm = '0;
  logic [17:0] cbusy = '0;
  logic [63:0] prev = '0, fired, expect_f;
  class_cfg_t cfg [64];
  int ds [64];
  int checks = 0, failures = 0, nfired = 0, nds = 0, nbusy = 0;

  trigger_class dut (.clk, .rst, .level_in(lin), .gen, .bcmask(bcm), .cluster_busy(cbusy),
    .prev_fired(prev), .cfg, .fired);
  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 64; c++) begin
      cfg[c] = '0;
      cfg[c].enable    = ($urandom % 8) != 0;
      cfg[c].in_mask   = '0;
      for (int k = 0; k < 1 + c % 2; k++) begin
        int b;
        b = int'($urandom % 48);
        cfg[c].in_mask[b] = 1'b1;
      end
      if (c == 7) cfg[c].in_mask = '0;   // nothing selected: never fires
      if (c % 5 == 0) cfg[c].gen_mask = 2'($urandom % 4);
      cfg[c].bcm_en    = 1'($urandom);
      cfg[c].bcm_sel   = 2'($urandom);
      cfg[c].need_prev = (c % 4 == 0);
      cfg[c].cluster   = 5'($urandom % 18);
      cfg[c].downscale = (c % 3 == 0) ? 16'($urandom % 4) : 16'd0;
      ds[c] = 0;
    end
    repeat (2) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    for (int t = 0; t < 2000; t++) begin
      lin = {$urandom, $urandom} | {$urandom, $urandom};
      gen = 2'($urandom);
      bcm = 4'($urandom) | 4'($urandom);
      cbusy = 18'($urandom) & 18'($urandom) & 18'($urandom);
      prev = {$urandom, $urandom} | {$urandom, $urandom};
      for (int c = 0; c < 64; c++) begin
        logic cond, b;
        cond = cfg[c].enable && (cfg[c].in_mask != 0 || cfg[c].gen_mask != 0) && ((lin & cfg[c].in_mask) == cfg[c].in_mask) &&
               ((gen & cfg[c].gen_mask) == cfg[c].gen_mask) &&
               (!cfg[c].bcm_en || bcm[cfg[c].bcm_sel]) && (!cfg[c].need_prev || prev[c]);
        b = !cfg[c].need_prev && cbusy[cfg[c].cluster];
        expect_f[c] = cond && !b && ds[c] == 0;
        if (cond && b) nbusy++;
        if (cond && !b && ds[c] != 0) nds++;
        if (cond && !b) ds[c] = (ds[c] >= int'(cfg[c].downscale)) ? 0 : ds[c] + 1;
      end
      @(negedge clk);
      checks++;
      if (fired !== expect_f) begin
        failures++;
        $display("FAIL t=%0d got %h exp %h", t, fired, expect_f);
        for (int c = 0; c < 64; c++) if (fired[c] != expect_f[c]) $display("  class %0d cfg %p lin %h gen %b bcm %b cb %h prev %b", c, cfg[c], lin, gen, bcm, cbusy, prev[c]);
      end
      nfired += $countones(fired);
    end
    checks++; if (nfired < 100 || nds < 10 || nbusy < 10) begin
      failures++; $display("FAIL coverage fired=%0d ds=%0d busy=%0d", nfired, nds, nbusy);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
