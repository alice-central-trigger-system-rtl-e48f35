// tb_record_packer: orbits of 50 BCs with sparse random payloads; the word
// stream must be, in order, one orbit header at each orbit start and one data
// word (BC, payload) for each BC with a non-zero payload, without overflow.
module tb_record_packer;
  logic clk = 0, rst = 1;
  logic [11:0] bc = 0;
  logic [31:0] orbit = 0;
  logic os = 0;
  logic [47:0] pay = 0;
  logic [79:0] word;
  logic valid, ovf;
  logic [79:0] q [$];
  int checks = 0, failures = 0, nhdr = 0;

  record_packer dut (.clk, .rst, .bc, .orbit, .orbit_start(os), .payload(pay), .word, .valid, .overflow(ovf));
  always #5 clk = ~clk;

  initial begin
    #1000000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  always @(negedge clk) if (!rst && valid) begin
    logic [79:0] e;
    checks++;
    e = q.pop_front();
    if (word !== e) begin failures++; $display("FAIL word %h exp %h", word, e); end
    if (word[79]) nhdr++;
  end

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst = 0;
    for (int t = 0; t < 2000; t++) begin
      logic [79:0] w;
      bc = 12'(t % 50); orbit = 32'(t / 50) + 32'd7; os = (t % 50) == 0;
      pay = ($urandom % 3 == 0) ? {$urandom, $urandom} : 48'h0;
      if (os) begin w = '0; w[79] = 1; w[31:0] = orbit; q.push_back(w); end
      if (pay != 0) begin w = '0; w[75:64] = bc; w[47:0] = pay; q.push_back(w); end
      @(negedge clk);
    end
    pay = 0; os = 0;
    repeat (20) @(negedge clk);
    checks++;
    if (q.size() != 0 || ovf || nhdr != 40) begin failures++; $display("FAIL left %0d ovf %b hdr %0d", q.size(), ovf, nhdr); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
