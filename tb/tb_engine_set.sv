// tb_engine_set: self-checking test of the engine set.
//
// Two engine sets with the same key, region and IV base share the test:
//  * A (write zero-fill, no counters) plays the data owner: it encrypts a
//    plaintext pattern into its own device-memory model. Every ciphertext
//    word is compared with a reference AES-128 model:
//    ct = pt ^ AES(K, {IV_BASE + {ctr, i}, w}) with ctr = 0.
//  * The memory image is then copied to B's memory (fill before write,
//    counters on, the default configuration). B must read the plaintext back,
//    serve repeated reads from its buffer, reject a tampered chunk (SLVERR,
//    auth_err), write a chunk back with its counter advanced (checked against
//    the reference again with ctr = 1), and reject a replay of the chunk's
//    older ciphertext and tag.
// Small sizes: 128-byte chunks, two buffer lines, a 4 KiB region.
module tb_engine_set;
  import shield_pkg::*;
  import ref_aes_pkg::*;

  localparam int C_MEM = 128, BUF = 256, BPC = C_MEM / 64;
  localparam logic [63:0] RBASE = 64'h1000, RBYTES = 64'h1000, TBASE = 64'h2_0000;
  localparam logic [95:0] IVB = 96'h0000_0007_0000_0000_0000_0100;
  localparam logic [127:0] KEY = 128'h000102030405060708090a0b0c0d0e0f;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  logic key_update;
  int   hits_b = 0, misses_b = 0, evicts_b = 0, afails_b = 0;

  // ---------------- instance A and its memory
  logic a_arv, a_arr, a_rv, a_rr, a_awv, a_awr, a_wv, a_wr, a_bv, a_br;
  axi_ax_t a_ar, a_aw; axi_r_t a_r; axi_w_t a_w; axi_b_t a_b;
  logic am_arv, am_arr, am_rv, am_rr, am_awv, am_awr, am_wv, am_wr, am_bv, am_br;
  axi_ax_t am_ar, am_aw; axi_r_t am_r; axi_w_t am_w; axi_b_t am_b;
  logic a_flush, a_fdone, a_aerr, a_hit, a_miss, a_ev, a_af;

  engine_set #(.C_MEM(C_MEM), .BUF_BYTES(BUF), .REGION_BASE(RBASE), .REGION_BYTES(RBYTES),
               .TAG_BASE(TBASE), .USE_COUNTERS(1'b0), .WRITE_ZERO_FILL(1'b1), .IV_BASE(IVB)) u_a (
    .clk, .rst_n, .key(KEY), .key_update,
    .s_ar_valid(a_arv), .s_ar_ready(a_arr), .s_ar(a_ar), .s_r_valid(a_rv), .s_r_ready(a_rr), .s_r(a_r),
    .s_aw_valid(a_awv), .s_aw_ready(a_awr), .s_aw(a_aw), .s_w_valid(a_wv), .s_w_ready(a_wr), .s_w(a_w),
    .s_b_valid(a_bv), .s_b_ready(a_br), .s_b(a_b),
    .m_ar_valid(am_arv), .m_ar_ready(am_arr), .m_ar(am_ar), .m_r_valid(am_rv), .m_r_ready(am_rr), .m_r(am_r),
    .m_aw_valid(am_awv), .m_aw_ready(am_awr), .m_aw(am_aw), .m_w_valid(am_wv), .m_w_ready(am_wr), .m_w(am_w),
    .m_b_valid(am_bv), .m_b_ready(am_br), .m_b(am_b),
    .flush_req(a_flush), .flush_done(a_fdone), .auth_err(a_aerr),
    .ev_hit(a_hit), .ev_miss(a_miss), .ev_evict(a_ev), .ev_auth_fail(a_af));
  axi_master_bfm bfm_a (.clk,
    .ar_valid(a_arv), .ar_ready(a_arr), .ar(a_ar), .r_valid(a_rv), .r_ready(a_rr), .r(a_r),
    .aw_valid(a_awv), .aw_ready(a_awr), .aw(a_aw), .w_valid(a_wv), .w_ready(a_wr), .w(a_w),
    .b_valid(a_bv), .b_ready(a_br), .b(a_b));
  axi_mem_model mem_a (.clk, .rst_n,
    .ar_valid(am_arv), .ar_ready(am_arr), .ar(am_ar), .r_valid(am_rv), .r_ready(am_rr), .r(am_r),
    .aw_valid(am_awv), .aw_ready(am_awr), .aw(am_aw), .w_valid(am_wv), .w_ready(am_wr), .w(am_w),
    .b_valid(am_bv), .b_ready(am_br), .b(am_b));

  // ---------------- instance B and its memory
  logic b_arv, b_arr, b_rv, b_rr, b_awv, b_awr, b_wv, b_wr, b_bv, b_br;
  axi_ax_t b_ar, b_aw; axi_r_t b_r; axi_w_t b_w; axi_b_t b_b;
  logic bm_arv, bm_arr, bm_rv, bm_rr, bm_awv, bm_awr, bm_wv, bm_wr, bm_bv, bm_br;
  axi_ax_t bm_ar, bm_aw; axi_r_t bm_r; axi_w_t bm_w; axi_b_t bm_b;
  logic b_flush, b_fdone, b_aerr, b_hit, b_miss, b_ev, b_af;

  engine_set #(.C_MEM(C_MEM), .BUF_BYTES(BUF), .REGION_BASE(RBASE), .REGION_BYTES(RBYTES),
               .TAG_BASE(TBASE), .IV_BASE(IVB)) u_b (
    .clk, .rst_n, .key(KEY), .key_update,
    .s_ar_valid(b_arv), .s_ar_ready(b_arr), .s_ar(b_ar), .s_r_valid(b_rv), .s_r_ready(b_rr), .s_r(b_r),
    .s_aw_valid(b_awv), .s_aw_ready(b_awr), .s_aw(b_aw), .s_w_valid(b_wv), .s_w_ready(b_wr), .s_w(b_w),
    .s_b_valid(b_bv), .s_b_ready(b_br), .s_b(b_b),
    .m_ar_valid(bm_arv), .m_ar_ready(bm_arr), .m_ar(bm_ar), .m_r_valid(bm_rv), .m_r_ready(bm_rr), .m_r(bm_r),
    .m_aw_valid(bm_awv), .m_aw_ready(bm_awr), .m_aw(bm_aw), .m_w_valid(bm_wv), .m_w_ready(bm_wr), .m_w(bm_w),
    .m_b_valid(bm_bv), .m_b_ready(bm_br), .m_b(bm_b),
    .flush_req(b_flush), .flush_done(b_fdone), .auth_err(b_aerr),
    .ev_hit(b_hit), .ev_miss(b_miss), .ev_evict(b_ev), .ev_auth_fail(b_af));
  axi_master_bfm bfm_b (.clk,
    .ar_valid(b_arv), .ar_ready(b_arr), .ar(b_ar), .r_valid(b_rv), .r_ready(b_rr), .r(b_r),
    .aw_valid(b_awv), .aw_ready(b_awr), .aw(b_aw), .w_valid(b_wv), .w_ready(b_wr), .w(b_w),
    .b_valid(b_bv), .b_ready(b_br), .b(b_b));
  axi_mem_model mem_b (.clk, .rst_n,
    .ar_valid(bm_arv), .ar_ready(bm_arr), .ar(bm_ar), .r_valid(bm_rv), .r_ready(bm_rr), .r(bm_r),
    .aw_valid(bm_awv), .aw_ready(bm_awr), .aw(bm_aw), .w_valid(bm_wv), .w_ready(bm_wr), .w(bm_w),
    .b_valid(bm_bv), .b_ready(bm_br), .b(bm_b));

  always @(posedge clk) begin
    if (b_hit) hits_b++;
    if (b_miss) misses_b++;
    if (b_ev) evicts_b++;
    if (b_af) afails_b++;
  end

  function automatic logic [511:0] pat(input logic [63:0] addr, input int gen);
    logic [511:0] d;
    for (int k = 0; k < 16; k++) d[32*k +: 32] = 32'(addr) * 32'd2654435761 + 32'(k) + 32'(gen) * 32'h0101_0101;
    return d;
  endfunction

  // Check the ciphertext of chunk c in memory `img` against the reference.
  task automatic check_ct(input int c, input int gen, input logic [31:0] ctr, input bit from_b);
    int bad = 0;
    for (int bt = 0; bt < BPC; bt++) begin
      logic [63:0] a = RBASE + 64'(c * C_MEM + 64 * bt);
      logic [511:0] ct = from_b ? mem_b.rd(58'(a >> 6)) : mem_a.rd(58'(a >> 6));
      logic [511:0] pt = pat(a, gen);
      for (int l = 0; l < 4; l++) begin
        logic [95:0] iv = IVB + {ctr, 64'(c)};
        logic [127:0] ks = encrypt128(KEY, {iv, 32'(4 * bt + l)});
        if (ct[128*l +: 128] !== (pt[128*l +: 128] ^ ks)) begin
          if (bad == 0) $display("  chunk %0d word %0d: memory %h plaintext %h keystream %h", c, 4*bt+l, ct[128*l +: 128], pt[128*l +: 128], ks);
          bad++;
        end
      end
    end
    check(bad == 0, $sformatf("ciphertext of chunk %0d (ctr %0d) matches reference AES-CTR", c, ctr));
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] resp;
    int cyc, hit_cyc;
    logic [511:0] old_ct [BPC];
    logic [511:0] old_tag;
    bit ok;
    key_update = 0; a_flush = 0; b_flush = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); key_update = 1; @(negedge clk); key_update = 0;
    repeat (80) @(posedge clk);

    // ---- A encrypts chunks 0..5 (one burst each)
    for (int c = 0; c < 6; c++) begin
      for (int bt = 0; bt < BPC; bt++) bfm_a.wbuf[bt] = pat(RBASE + 64'(c * C_MEM + 64 * bt), 0);
      bfm_a.write_burst(RBASE + 64'(c * C_MEM), BPC, resp, cyc);
      check(resp == RESP_OKAY, "A write OKAY");
    end
    @(negedge clk); a_flush = 1; @(negedge clk); a_flush = 0;
    wait (a_fdone);
    @(posedge clk);
    for (int c = 0; c < 6; c++) check_ct(c, 0, 0, 0);
    check(mem_a.rd(58'(TBASE >> 6)) != '0, "tags written to the tag region");

    // ---- copy the memory image to B
    foreach (mem_a.mem[i]) mem_b.mem[i] = mem_a.mem[i];

    // ---- B reads everything back
    for (int c = 0; c < 6; c++) begin
      bfm_b.read_burst(RBASE + 64'(c * C_MEM), BPC, resp, cyc);
      ok = (resp == RESP_OKAY);
      for (int bt = 0; bt < BPC; bt++) if (bfm_b.rbuf[bt] !== pat(RBASE + 64'(c * C_MEM + 64 * bt), 0)) ok = 0;
      check(ok, $sformatf("B decrypts and authenticates chunk %0d", c));
    end
    // chunk 5 is now buffered: a re-read must hit and take a few cycles only
    bfm_b.read_burst(RBASE + 64'(5 * C_MEM), BPC, resp, hit_cyc);
    check(resp == RESP_OKAY && bfm_b.rbuf[1] === pat(RBASE + 64'(5 * C_MEM + 64), 0), "B buffered re-read");
    check(hit_cyc <= BPC + 3, $sformatf("buffer hit serves one beat per cycle (%0d cycles)", hit_cyc));
    check(!b_aerr, "no authentication error so far");

    // ---- tamper with chunk 1 in B's memory (not buffered any more)
    mem_b.mem[58'((RBASE + 64'(C_MEM)) >> 6)] ^= 512'h1;
    bfm_b.read_burst(RBASE + 64'(C_MEM), BPC, resp, cyc);
    check(resp == RESP_SLVERR && bfm_b.rbuf[0] == '0, "tampered chunk is rejected with SLVERR");
    check(b_aerr, "auth_err raised after tampering");

    // ---- replay: save chunk 2's ciphertext and tag, rewrite it, restore old
    for (int bt = 0; bt < BPC; bt++) old_ct[bt] = mem_b.rd(58'((RBASE + 64'(2 * C_MEM + 64 * bt)) >> 6));
    old_tag = mem_b.rd(58'((TBASE + 64'((2 / 4) * 64)) >> 6));
    for (int bt = 0; bt < BPC; bt++) bfm_b.wbuf[bt] = pat(RBASE + 64'(2 * C_MEM + 64 * bt), 1);
    bfm_b.write_burst(RBASE + 64'(2 * C_MEM), BPC, resp, cyc);
    check(resp == RESP_OKAY, "B write to an existing chunk (fill then modify)");
    @(negedge clk); b_flush = 1; @(negedge clk); b_flush = 0;
    wait (b_fdone);
    @(posedge clk);
    check_ct(2, 1, 1, 1);
    bfm_b.read_burst(RBASE + 64'(2 * C_MEM), BPC, resp, cyc);
    check(resp == RESP_OKAY && bfm_b.rbuf[0] === pat(RBASE + 64'(2 * C_MEM), 1), "B reads its new data");
    // evict chunk 2 (clean) by reading chunks 0 and 4 that map to the same line
    bfm_b.read_burst(RBASE, BPC, resp, cyc);
    bfm_b.read_burst(RBASE + 64'(4 * C_MEM), BPC, resp, cyc);
    for (int bt = 0; bt < BPC; bt++) mem_b.mem[58'((RBASE + 64'(2 * C_MEM + 64 * bt)) >> 6)] = old_ct[bt];
    mem_b.mem[58'((TBASE + 64'((2 / 4) * 64)) >> 6)] = old_tag;
    bfm_b.read_burst(RBASE + 64'(2 * C_MEM), BPC, resp, cyc);
    check(resp == RESP_SLVERR, "replayed old ciphertext and tag are rejected (counter)");

    check(hits_b > 0 && misses_b > 0 && evicts_b > 0 && afails_b >= 2,
          $sformatf("mechanisms seen: hits %0d misses %0d evictions %0d auth failures %0d",
                    hits_b, misses_b, evicts_b, afails_b));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
