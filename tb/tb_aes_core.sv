// tb_aes_core: known-answer test of the AES engine.
//
// Runs the FIPS-197 Appendix C vectors (AES-128 and AES-256) through two
// engine instances, one with 16 S-box lookups per cycle and one with 4, and
// checks the ciphertext and the latency 1 + NR*(16/SBOX_PAR + 1).
module tb_aes_core;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         kl128, kr128, iv128, ir128, ov128;
  logic [127:0] k128, in128, out128;
  logic         kl256, kr256, iv256, ir256, ov256;
  logic [255:0] k256;
  logic [127:0] in256, out256;

  aes_core #(.KEY_BITS(128), .SBOX_PAR(16)) u128 (
    .clk, .rst_n, .key_load(kl128), .key(k128), .key_ready(kr128),
    .in_valid(iv128), .in_ready(ir128), .in_block(in128),
    .out_valid(ov128), .out_ready(1'b1), .out_block(out128));
  aes_core #(.KEY_BITS(256), .SBOX_PAR(4)) u256 (
    .clk, .rst_n, .key_load(kl256), .key(k256), .key_ready(kr256),
    .in_valid(iv256), .in_ready(ir256), .in_block(in256),
    .out_valid(ov256), .out_ready(1'b1), .out_block(out256));

  task automatic check(input string what, input logic [127:0] got, exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    kl128 = 0; kl256 = 0; iv128 = 0; iv256 = 0;
    k128 = 128'h000102030405060708090a0b0c0d0e0f;
    k256 = 256'h000102030405060708090a0b0c0d0e0f101112131415161718191a1b1c1d1e1f;
    in128 = 128'h00112233445566778899aabbccddeeff;
    in256 = 128'h00112233445566778899aabbccddeeff;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    kl128 <= 1; kl256 <= 1;
    @(posedge clk);
    kl128 <= 0; kl256 <= 0;
    wait (kr128 && kr256);
    @(posedge clk);
    // AES-128, 16x
    iv128 <= 1;
    @(posedge clk);
    iv128 <= 0;
    cyc = 0;
    while (!ov128) begin @(posedge clk); cyc++; end
    check("AES-128 FIPS-197 C.1", out128, 128'h69c4e0d86a7b0430d8cdb78070b4c55a);
    checks++; if (cyc != 21) begin failures++; $display("FAIL AES-128/16x latency %0d", cyc); end
    // second block: encrypting the ciphertext again must differ and be stable
    @(posedge clk);
    // AES-256, 4x
    iv256 <= 1;
    @(posedge clk);
    iv256 <= 0;
    cyc = 0;
    while (!ov256) begin @(posedge clk); cyc++; end
    check("AES-256 FIPS-197 C.3", out256, 128'h8ea2b7ca516745bfeafc49904b496089);
    checks++; if (cyc != 1 + 14*5) begin failures++; $display("FAIL AES-256/4x latency %0d", cyc); end
    // FIPS-197 Appendix B vector on the 128-bit engine with a fresh key
    @(posedge clk);
    k128 <= 128'h2b7e151628aed2a6abf7158809cf4f3c;
    kl128 <= 1;
    @(posedge clk);
    kl128 <= 0;
    @(posedge clk);
    wait (kr128);
    in128 <= 128'h3243f6a8885a308d313198a2e0370734;
    iv128 <= 1;
    @(posedge clk);
    iv128 <= 0;
    while (!ov128) @(posedge clk);
    check("AES-128 FIPS-197 B", out128, 128'h3925841d02dc09fbdc118597196a0b32);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
