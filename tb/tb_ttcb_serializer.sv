// tb_ttcb_serializer: decodes the TTC-B bit stream in the testbench.
// Part 1 (orbit of 400 BCs): random messages and calibration requests; every
// frame must have a correct Hamming code (checked with the testbench's own
// encoder), long words must carry word numbers 1..7 and the 12-bit chunks
// must rebuild each message, and every orbit broadcast must start in the BC
// after its orbit pulse (no long word may be in the way), from the second
// orbit on: before the first pulse the orbit phase is unknown.
// Part 2 (full 3564-BC orbit, messages always waiting): the message rate must
// be close to 40.079 MHz / 294, i.e. about 130 kHz.
module tb_ttcb_serializer;
  logic clk = 0, rst = 1;
  logic orb = 0, cal = 0, mv = 0, pop, ttc_b, fb;
  logic [75:0] msg = 0;
  logic orb2 = 0, pop2, ttc_b2, fb2;
  int checks = 0, failures = 0;
  logic [75:0] sent [$];
  int orbit_t [$];
  int nmsg = 0, nbc_orb = 0, nbc_cal = 0, nwords = 0;
  int pops2 = 0;

  ttcb_serializer #(.BC_ORBIT(400)) dut (.clk, .rst, .orbit_pulse(orb), .cal_req(cal),
    .msg_valid(mv), .msg, .msg_pop(pop), .ttc_b, .frame_busy(fb));
  ttcb_serializer dut2 (.clk, .rst, .orbit_pulse(orb2), .cal_req(1'b0),
    .msg_valid(1'b1), .msg(76'h123), .msg_pop(pop2), .ttc_b(ttc_b2), .frame_busy(fb2));
  always #5 clk = ~clk;

  function automatic logic [6:0] h32(input logic [31:0] d);
    logic [38:0] cw;  // positions 1..38
    logic [6:0] c;
    int k;
    cw = '0; k = 0;
    for (int p = 1; p <= 38; p++)
      if (p != 1 && p != 2 && p != 4 && p != 8 && p != 16 && p != 32) begin cw[p] = d[k]; k++; end
    c = '0;
    for (int b = 0; b < 6; b++)
      for (int p = 1; p <= 38; p++) if (p[b]) c[b] ^= cw[p];
    c[6] = ^d ^ ^c[5:0];
    return c;
  endfunction

  function automatic logic [4:0] h8(input logic [7:0] d);
    logic [12:0] cw;
    logic [4:0] c;
    int k;
    cw = '0; k = 0;
    for (int p = 1; p <= 12; p++)
      if (p != 1 && p != 2 && p != 4 && p != 8) begin cw[p] = d[k]; k++; end
    c = '0;
    for (int b = 0; b < 4; b++)
      for (int p = 1; p <= 12; p++) if (p[b]) c[b] ^= cw[p];
    c[4] = ^d ^ ^c[3:0];
    return c;
  endfunction

  initial begin
    #3000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  // stream decoder for dut
  initial begin
    logic [41:0] f;
    logic [83:0] acc;
    int t0;
    acc = '0;
    @(negedge rst);
    forever begin
      @(negedge clk);
      if (ttc_b == 1'b0) begin
        t0 = int'($time / 10);
        f = '0;
        f[41] = 0;
        @(negedge clk); f[40] = ttc_b;
        if (f[40]) begin
          for (int i = 39; i >= 0; i--) begin @(negedge clk); f[i] = ttc_b; end
          checks++;
          if (f[7:1] !== h32(f[39:8]) || f[0] !== 1'b1 || f[25:24] !== 2'b11) begin
            failures++; $display("FAIL long word %h", f);
          end
          begin
            int w;
            w = int'(f[23:20]);
            nwords++;
            acc[12*(w-1) +: 12] = {f[19:16], f[15:8]};
            if (w == 7) begin
              logic [75:0] e;
              e = sent.pop_front();
              checks++;
              if (acc[75:0] !== e) begin failures++; $display("FAIL message %h exp %h", acc[75:0], e); end
              nmsg++;
            end
          end
        end else begin
          logic [15:0] s;
          s[15] = 0; s[14] = 0;
          for (int i = 13; i >= 0; i--) begin @(negedge clk); s[i] = ttc_b; end
          checks++;
          if (s[5:1] !== h8(s[13:6]) || s[0] !== 1'b1) begin failures++; $display("FAIL short %h", s); end
          if (s[13:6] == 8'h01) begin
            int e;
            e = orbit_t.pop_front();
            checks++;
            if (nbc_orb > 0 && t0 != e + 1) begin failures++; $display("FAIL orbit broadcast at %0d, pulse %0d", t0, e); end
            nbc_orb++;
          end else if (s[13:6] == 8'h04) nbc_cal++;
        end
      end
    end
  end

  // message source for dut: a new message after each pop
  always @(posedge clk) if (!rst) begin
    if (pop || !mv) begin
      logic [75:0] m;
      m = {$urandom, $urandom, 12'($urandom)};
      msg <= m;
      mv  <= 1'b1;
      sent.push_back(m);
    end
  end

  initial begin
    int t2, cyc;
    repeat (3) @(posedge clk);
    @(negedge clk); rst = 0;
    for (int t = 0; t < 12000; t++) begin
      orb = (t % 400) == 5;
      orb2 = (t % 3564) == 5;
      cal = ($urandom % 3000) == 0;
      if (orb) orbit_t.push_back(int'($time / 10));
      if (pop2) pops2++;
      @(negedge clk);
    end
    orb = 0; cal = 0;
    repeat (400) @(negedge clk);
    checks++;
    if (nbc_orb < 29 || nmsg < 20 || orbit_t.size() != 0) begin
      failures++; $display("FAIL counts orbit bcast %0d msgs %0d", nbc_orb, nmsg);
    end
    // rate: pops2 messages in 12000 BCs of 40.079 MHz
    begin
      real rate;
      rate = real'(pops2) * 40.079e6 / 12000.0;
      $display("TTC-B message rate %0.1f kHz", rate / 1000.0);
      checks++;
      if (rate < 125.0e3 || rate > 136.4e3) begin failures++; $display("FAIL rate"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
