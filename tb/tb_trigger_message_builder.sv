// tb_trigger_message_builder: random stimulus per BC; the frame one BC later
// must hold the expected message fields, destination, message counter and
// HeartBeat Decision Record, for a triggered and a continuous detector.
module tb_trigger_message_builder;
  import cts_pkg::*;
  logic clk = 0, rst = 1;
  logic trig = 1;
  logic [11:0] bc = 0;
  logic [31:0] orbit = 0, hbo = 0;
  logic os = 0, ts = 0, hbr = 0, lm = 0, l0 = 0, l1 = 0, sot = 0, eot = 0, cal = 0, hv = 0, hd = 0;
  trig_msg_t msg, e;
  logic mv, ni;
  logic [199:0] frame;
  int checks = 0, failures = 0, sent = 0;

  trigger_message_builder dut (.clk, .rst, .det_id(8'd5), .triggered(trig), .bc, .orbit,
    .orbit_start(os), .tf_start(ts), .hbr, .det_lm(lm), .det_l0(l0), .det_l1(l1),
    .sot, .eot, .cal, .hbd_valid(hv), .hbd(hd), .hbd_orbit(hbo),
    .msg, .msg_valid(mv), .nonidle(ni), .frame);
  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst <= 0;
    @(negedge clk);
    for (int t = 0; t < 2000; t++) begin
      logic eni;
      trig = t < 1000;
      bc = 12'($urandom % 3564); orbit = $urandom;
      os = ($urandom % 8) == 0; ts = os && ($urandom % 2);
      hbr = 1'($urandom);
      lm = ($urandom % 6) == 0; l0 = ($urandom % 6) == 0; l1 = ($urandom % 6) == 0;
      sot = ($urandom % 50) == 0; eot = ($urandom % 50) == 0; cal = ($urandom % 50) == 0;
      hv = ($urandom % 10) == 0; hd = 1'($urandom); hbo = $urandom;
      e = '0; e.bc = bc; e.orbit = orbit;
      e.ttype[TT_ORBIT] = os; e.ttype[TT_HB] = os; e.ttype[TT_HBR] = os && hbr;
      e.ttype[TT_TF] = ts; e.ttype[TT_SOT] = sot; e.ttype[TT_EOT] = eot; e.ttype[TT_CAL] = cal;
      if (trig && (lm || l0 || l1)) begin
        e.ttype[TT_PHYS] = 1; e.level = {1'b0, l1, l0, lm};
      end
      eni = (e.ttype != 0) || hv;
      @(negedge clk);
      checks++;
      if (msg !== e || frame[79:0] !== e || frame[87:80] !== 8'd5 || mv !== (e.ttype != 0) ||
          ni !== eni || frame[119:88] !== 32'(sent) || frame[151:120] !== hbo ||
          frame[152] !== (hv && hd) || frame[153] !== hv || frame[199:154] !== '0) begin
        failures++;
        $display("FAIL t=%0d msg %h exp %h", t, msg, e);
      end
      if (eni) sent++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
