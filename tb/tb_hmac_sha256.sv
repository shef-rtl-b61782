// tb_hmac_sha256: known-answer test of the HMAC-SHA256 engine.
//
// Vectors: RFC 4231 test cases 2 and 3, and three messages of 56, 64 and
// 528 bytes (byte i = 7*i+3 mod 256, key bytes 00..0f) whose tags were
// computed with a reference HMAC-SHA256 implementation. 56 and 64 bytes
// exercise the padding spilling into an extra block; 528 bytes is the
// 16-byte header plus one 512-byte chunk as the engine set uses it.
// Also checks the latency formula for the 528-byte message.
module tb_hmac_sha256;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [255:0] key;
  logic         start, busy, in_valid, in_ready, out_valid;
  logic [31:0]  msg_len;
  logic [127:0] in_data;
  logic [255:0] tag;
  logic [7:0]   msg [1024];

  hmac_sha256 dut (.clk, .rst_n, .key, .start, .msg_len, .busy, .in_valid, .in_ready,
                   .in_data, .out_valid, .out_ready(1'b1), .tag);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input string name, input int len, input logic [255:0] exp, output int cycles);
    int w;
    start <= 1; msg_len <= 32'(len);
    @(posedge clk);
    start <= 0;
    cycles = 1;
    w = 0;
    while (!out_valid) begin
      if (w < (len + 15) / 16) begin
        in_valid <= 1;
        for (int b = 0; b < 16; b++) in_data[127-8*b -: 8] <= (16*w + b < len) ? msg[16*w+b] : 8'hee;
      end else in_valid <= 0;
      @(posedge clk);
      cycles++;
      if (in_valid && in_ready) w++;
    end
    in_valid <= 0;
    checks++;
    if (tag !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", name, tag, exp);
    end
    @(posedge clk);
  endtask

  initial begin
    int cyc;
    string s;
    start = 0; in_valid = 0; in_data = '0; msg_len = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // RFC 4231 TC2
    key = {32'h4a656665, 224'h0};
    s = "what do ya want for nothing?";
    for (int i = 0; i < s.len(); i++) msg[i] = s[i];
    run("RFC4231 TC2", 28, 256'h5bdcc146bf60754e6a042426089575c75a003f089d2739839dec58b964ec3843, cyc);
    // RFC 4231 TC3
    key = {{20{8'haa}}, 96'h0};
    for (int i = 0; i < 50; i++) msg[i] = 8'hdd;
    run("RFC4231 TC3", 50, 256'h773ea91e36800e46854db8ebd09181a72959098b3ef8c122d9635514ced565fe, cyc);
    key = {128'h000102030405060708090a0b0c0d0e0f, 128'h0};
    for (int i = 0; i < 1024; i++) msg[i] = 8'((i * 7 + 3) & 255);
    run("56 bytes", 56, 256'h582d0d54018e71d5146b528a946583754c13bbf22cde67a29d5992e98a241101, cyc);
    run("64 bytes", 64, 256'h09983ba7f248594595660814321680c7d570e8dcfa988d8707deca03447dbd35, cyc);
    run("528 bytes", 528, 256'hca4b98b15451e28139d520ce32fae59b9d43f06c7e7797fa7e4cbd312ab38253, cyc);
    // 3 + ceil((528+9)/64) = 12 compressions of 67 cycles, 36 word cycles
    checks++;
    if (cyc < 12 * 67 + 36 || cyc > 12 * 67 + 36 + 4) begin
      failures++;
      $display("FAIL 528-byte latency %0d", cyc);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
