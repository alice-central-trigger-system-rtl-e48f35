// tb_hbr_generator: 18 detectors in random modes over several Time Frames of
// 16 HeartBeat frames (12 BCs each), with random buffer-status messages.
// Checked: hbr per frame against a reference model, exactly n_hbr rejects per
// TF in downscale mode, and that collective mode followed the buffer status.
module tb_hbr_generator;
  import cts_pkg::*;
  localparam int TFL = 16, HBL = 12;
  logic clk = 0, rst = 1, hbf_next = 0, tf_next = 0, bs_valid = 0;
  logic [4:0] bs_det = 0;
  logic [7:0] bs = 0;
  hbr_mode_e mode [18];
  logic [7:0] n_hbr [18], thr [18];
  logic [17:0] hbr;
  int acc [18], bmax [18], cnt_tf [18];
  logic [17:0] ehbr;
  int checks = 0, failures = 0, ncoll = 0;

  hbr_generator dut (.clk, .rst, .hbf_next, .tf_next, .tf_len(8'(TFL)), .bs_valid, .bs_det, .bs,
    .mode, .n_hbr, .bs_thr(thr), .hbr);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    for (int d = 0; d < 18; d++) begin
      mode[d] = hbr_mode_e'(d % 3);
      n_hbr[d] = 8'($urandom % (TFL + 1));
      thr[d] = 8'(100 + $urandom % 100);
      acc[d] = 0; bmax[d] = 0; cnt_tf[d] = 0;
    end
    repeat (2) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < 5 * TFL; f++) begin
      // BCs inside the frame: buffer statuses
      for (int t = 0; t < HBL - 1; t++) begin
        @(negedge clk);
        bs_valid = ($urandom % 2) == 1;
        bs_det = 5'($urandom % 18);
        bs = 8'($urandom);
        if (bs_valid && int'(bs) > bmax[bs_det]) bmax[bs_det] = int'(bs);
      end
      // last BC: decide
      @(negedge clk);
      bs_valid = 0;
      hbf_next = 1;
      tf_next = (f % TFL) == 0;
      for (int d = 0; d < 18; d++) begin
        int s;
        if (tf_next) begin
          if (f > 0 && mode[d] == HBR_DOWNSCALE) begin
            checks++;
            if (cnt_tf[d] != int'(n_hbr[d])) begin failures++; $display("FAIL det %0d %0d HBr in TF", d, cnt_tf[d]); end
          end
          cnt_tf[d] = 0;
          acc[d] = 0;
        end
        case (mode[d])
          HBR_DOWNSCALE: begin
            s = acc[d] + int'(n_hbr[d]);
            ehbr[d] = s >= TFL;
            acc[d] = ehbr[d] ? s - TFL : s;
          end
          HBR_COLLECTIVE: begin
            ehbr[d] = bmax[d] >= int'(thr[d]);
            if (ehbr[d]) ncoll++;
          end
          default: ehbr[d] = 0;
        endcase
        bmax[d] = 0;
        if (ehbr[d]) cnt_tf[d]++;
      end
      @(negedge clk);
      hbf_next = 0; tf_next = 0;
      checks++;
      if (hbr !== ehbr) begin failures++; $display("FAIL frame %0d %h %h", f, hbr, ehbr); end
    end
    checks++;
    if (ncoll == 0) begin failures++; $display("FAIL collective never rejected"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
