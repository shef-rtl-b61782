// tb_shield_top: end-to-end test of the Shield.
//
// The testbench plays three parties around the Shield: the data owner's host
// (encrypted, tagged register commands over AXI4-Lite, built with reference
// AES and HMAC-SHA256 models), the accelerator (plaintext AXI4 bursts through
// an AXI master model, plus the accelerator side of the register file) and the
// untrusted device memory (an AXI4 memory model the testbench can read and
// tamper with). It checks that:
//  * a host write command reaches the accelerator's register and a read
//    command returns the accelerator's value, encrypted and tagged correctly;
//    a tampered command is refused and changes nothing;
//  * accelerator writes land in device memory only as AES-CTR ciphertext
//    (compared with the reference, counter 1 after the first write-back),
//    with tags in each engine set's tag region;
//  * data read back after eviction is decrypted and authenticated; re-reads
//    hit the buffer; a tampered chunk gives SLVERR; a burst outside every
//    region gives DECERR;
//  * both engine sets compete for device memory during a flush.
// Each mechanism is counted and a mechanism that never happens is a failure.
module tb_shield_top;
  import shield_pkg::*;
  import ref_aes_pkg::*;
  import ref_sha256_pkg::*;

  localparam int          C_MEM  = 128;
  localparam int          BUF    = 256;
  localparam logic [63:0] RBYTES = 64'h1000;
  localparam logic [63:0] TBASE  = 64'h2_0000;
  localparam logic [63:0] TSTR   = 64'h1000;
  localparam int          NREGS  = 32;
  localparam int          BPC    = C_MEM / 64;
  localparam int          LINES  = BUF / C_MEM;
  localparam int          NCH    = LINES + 2;       // chunks written per set
  localparam logic [127:0] KEY   = 128'h2b7e151628aed2a6abf7158809cf4f3c;
  localparam int          WATCHDOG = 2000000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // ---------------- DUT signals
  logic key_load_valid = 0, key_zeroize = 0;
  logic sh_awvalid = 0, sh_awready, sh_wvalid = 0, sh_wready, sh_bvalid, sh_bready = 0;
  logic sh_arvalid = 0, sh_arready, sh_rvalid, sh_rready = 0;
  logic [31:0] sh_awaddr = 0, sh_wdata = 0, sh_araddr = 0, sh_rdata;
  logic [1:0]  sh_bresp, sh_rresp;
  logic [NREGS-1:0][31:0] acc_reg_q;
  logic acc_reg_we = 0;
  logic [4:0] acc_reg_idx = 0;
  logic [31:0] acc_reg_wdata = 0;
  logic a_arv, a_arr, a_rv, a_rr, a_awv, a_awr, a_wv, a_wr, a_bv, a_br;
  axi_ax_t a_ar, a_aw; axi_r_t a_r; axi_w_t a_w; axi_b_t a_b;
  logic m_arv, m_arr, m_rv, m_rr, m_awv, m_awr, m_wv, m_wr, m_bv, m_br;
  axi_ax_t m_ar, m_aw; axi_r_t m_r; axi_w_t m_w; axi_b_t m_b;
  logic flush_req = 0, flush_done, key_valid, mem_auth_err;
  logic [1:0] ev_hit, ev_miss, ev_evict, ev_auth_fail;
  logic ev_reg_write, ev_reg_read, ev_reg_auth_fail, ev_arb_contended;

  shield_top #(.C_MEM(C_MEM), .BUF_BYTES(BUF), .REGION_BYTES(RBYTES), .TAG_BASE(TBASE),
               .TAG_STRIDE(TSTR), .ZERO_FILL(2'b11)) dut (
    .clk, .rst_n, .key_load_valid, .key_load_data(KEY), .key_zeroize,
    .sh_awvalid, .sh_awready, .sh_awaddr, .sh_wvalid, .sh_wready, .sh_wdata, .sh_wstrb(4'hf),
    .sh_bvalid, .sh_bready, .sh_bresp, .sh_arvalid, .sh_arready, .sh_araddr,
    .sh_rvalid, .sh_rready, .sh_rdata, .sh_rresp,
    .acc_reg_q, .acc_reg_we, .acc_reg_idx, .acc_reg_wdata,
    .acc_ar_valid(a_arv), .acc_ar_ready(a_arr), .acc_ar(a_ar), .acc_r_valid(a_rv), .acc_r_ready(a_rr), .acc_r(a_r),
    .acc_aw_valid(a_awv), .acc_aw_ready(a_awr), .acc_aw(a_aw), .acc_w_valid(a_wv), .acc_w_ready(a_wr), .acc_w(a_w),
    .acc_b_valid(a_bv), .acc_b_ready(a_br), .acc_b(a_b),
    .mem_ar_valid(m_arv), .mem_ar_ready(m_arr), .mem_ar(m_ar), .mem_r_valid(m_rv), .mem_r_ready(m_rr), .mem_r(m_r),
    .mem_aw_valid(m_awv), .mem_aw_ready(m_awr), .mem_aw(m_aw), .mem_w_valid(m_wv), .mem_w_ready(m_wr), .mem_w(m_w),
    .mem_b_valid(m_bv), .mem_b_ready(m_br), .mem_b(m_b),
    .flush_req, .flush_done, .key_valid, .mem_auth_err,
    .ev_hit, .ev_miss, .ev_evict, .ev_auth_fail,
    .ev_reg_write, .ev_reg_read, .ev_reg_auth_fail, .ev_arb_contended);

  axi_master_bfm bfm (.clk,
    .ar_valid(a_arv), .ar_ready(a_arr), .ar(a_ar), .r_valid(a_rv), .r_ready(a_rr), .r(a_r),
    .aw_valid(a_awv), .aw_ready(a_awr), .aw(a_aw), .w_valid(a_wv), .w_ready(a_wr), .w(a_w),
    .b_valid(a_bv), .b_ready(a_br), .b(a_b));
  axi_mem_model mem (.clk, .rst_n,
    .ar_valid(m_arv), .ar_ready(m_arr), .ar(m_ar), .r_valid(m_rv), .r_ready(m_rr), .r(m_r),
    .aw_valid(m_awv), .aw_ready(m_awr), .aw(m_aw), .w_valid(m_wv), .w_ready(m_wr), .w(m_w),
    .b_valid(m_bv), .b_ready(m_br), .b(m_b));

  // ---------------- mechanism counters
  int n_hit = 0, n_miss = 0, n_evict = 0, n_afail = 0, n_rw = 0, n_rr = 0, n_rfail = 0;
  int n_cont = 0, n_flush = 0, n_decerr = 0;
  always @(posedge clk) begin
    n_hit   += $countones(ev_hit);
    n_miss  += $countones(ev_miss);
    n_evict += $countones(ev_evict);
    n_afail += $countones(ev_auth_fail);
    if (ev_reg_write) n_rw++;
    if (ev_reg_read) n_rr++;
    if (ev_reg_auth_fail) n_rfail++;
    if (ev_arb_contended) n_cont++;
    if (flush_done) n_flush++;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host side: AXI4-Lite and register commands
  task automatic axil_write(input logic [31:0] addr, input logic [31:0] data);
    @(negedge clk);
    sh_awvalid = 1; sh_wvalid = 1; sh_awaddr = addr; sh_wdata = data;
    do @(posedge clk); while (!sh_awready);
    @(negedge clk);
    sh_awvalid = 0; sh_wvalid = 0; sh_bready = 1;
    while (!sh_bvalid) @(negedge clk);
    @(posedge clk); @(negedge clk);
    sh_bready = 0;
  endtask

  task automatic axil_read(input logic [31:0] addr, output logic [31:0] data);
    @(negedge clk);
    sh_arvalid = 1; sh_araddr = addr;
    do @(posedge clk); while (!sh_arready);
    @(negedge clk);
    sh_arvalid = 0; sh_rready = 1;
    while (!sh_rvalid) @(negedge clk);
    data = sh_rdata;
    @(posedge clk); @(negedge clk);
    sh_rready = 0;
  endtask

  function automatic logic [127:0] mac16(input logic [95:0] iv, input logic [127:0] ct);
    logic [7:0] m [256];
    logic [255:0] t;
    for (int i = 0; i < 256; i++) m[i] = 8'h0;
    for (int i = 0; i < 12; i++) m[i] = iv[95 - 8*i -: 8];
    for (int i = 0; i < 16; i++) m[16 + i] = ct[127 - 8*i -: 8];
    t = hmac16(KEY, m, 32);
    return t[255:128];
  endfunction

  // Send one command; returns the STATUS word afterwards.
  task automatic host_cmd(input bit wr, input logic [31:0] idx, input logic [31:0] data,
                          input logic [95:0] iv, input bit corrupt, output logic [31:0] status);
    logic [127:0] pt, ct, tag;
    pt  = {31'h0, wr, idx, data, 32'h0};
    ct  = pt ^ encrypt128(KEY, {iv, 32'h0});
    tag = mac16(iv, ct);
    if (corrupt) tag[0] = ~tag[0];
    for (int i = 0; i < 4; i++) axil_write(32'(4 * i), ct[127 - 32*i -: 32]);
    for (int i = 0; i < 4; i++) axil_write(32'h10 + 32'(4 * i), tag[127 - 32*i -: 32]);
    for (int i = 0; i < 3; i++) axil_write(32'h20 + 32'(4 * i), iv[95 - 32*i -: 32]);
    axil_write(32'h30, 32'h1);
    do axil_read(32'h34, status); while (status[0]);
  endtask

  // ---------------- memory helpers
  function automatic logic [511:0] pat(input logic [63:0] addr, input int gen);
    logic [511:0] d;
    for (int k = 0; k < 16; k++) d[32*k +: 32] = 32'(addr) * 32'd2246822519 + 32'(k) + 32'(gen) * 32'h0303_0303;
    return d;
  endfunction

  task automatic check_ct(input int s, input int c, input int gen, input logic [31:0] ctr);
    int bad = 0;
    logic [63:0] base = 64'(s) * RBYTES + 64'(c * C_MEM);
    for (int bt = 0; bt < BPC; bt++) begin
      logic [511:0] ct = mem.rd(58'((base + 64'(64 * bt)) >> 6));
      logic [511:0] pt = pat(base + 64'(64 * bt), gen);
      for (int l = 0; l < 4; l++) begin
        logic [95:0] iv = {16'(s), 80'h0} + {ctr, 64'(c)};
        if (ct[128*l +: 128] !== (pt[128*l +: 128] ^ encrypt128(KEY, {iv, 32'(4 * bt + l)}))) bad++;
      end
    end
    check(bad == 0, $sformatf("set %0d chunk %0d: device memory holds the reference AES-CTR ciphertext", s, c));
  endtask

  initial begin
    logic [31:0] st, w0, w1, w2, w3;
    logic [127:0] ct, tag, pt;
    logic [95:0] iv;
    logic [1:0] resp;
    int cyc;
    bit ok;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    check(!key_valid, "no key before Load Key");
    key_load_valid = 1; @(negedge clk); key_load_valid = 0;
    check(key_valid, "key stored");
    repeat (100) @(posedge clk);

    // ---- register interface
    host_cmd(1, 3, 32'hdead_beef, 96'h0000_0001_0000_0000_0000_0001, 0, st);
    check(!st[1] && acc_reg_q[3] == 32'hdead_beef, "host write command reaches register 3");
    host_cmd(1, 4, 32'h1234_5678, 96'h0000_0001_0000_0000_0000_0002, 1, st);
    check(st[1] && acc_reg_q[4] == 32'h0, "tampered command refused, register unchanged");
    @(negedge clk); acc_reg_we = 1; acc_reg_idx = 7; acc_reg_wdata = 32'hcafe_f00d;
    @(negedge clk); acc_reg_we = 0;
    host_cmd(0, 7, 32'h0, 96'h0000_0001_0000_0000_0000_0003, 0, st);
    check(!st[1] && st[2], "read command answered");
    axil_read(32'h00, w0); axil_read(32'h04, w1); axil_read(32'h08, w2); axil_read(32'h0c, w3);
    ct = {w0, w1, w2, w3};
    axil_read(32'h10, w0); axil_read(32'h14, w1); axil_read(32'h18, w2); axil_read(32'h1c, w3);
    tag = {w0, w1, w2, w3};
    axil_read(32'h20, w0); axil_read(32'h24, w1); axil_read(32'h28, w2);
    iv = {w0, w1, w2};
    pt = ct ^ encrypt128(KEY, {iv, 32'h0});
    check(iv[95], "response uses a Shield IV");
    check(tag == mac16(iv, ct), "response tag verifies on the host");
    check(pt[95:64] == 32'd7 && pt[63:32] == 32'hcafe_f00d, "response decrypts to the accelerator's value");

    // ---- memory: write NCH chunks in each of the two regions
    for (int s = 0; s < 2; s++)
      for (int c = 0; c < NCH; c++) begin
        logic [63:0] base;
        base = 64'(s) * RBYTES + 64'(c * C_MEM);
        for (int bt = 0; bt < BPC; bt++) bfm.wbuf[bt] = pat(base + 64'(64 * bt), 0);
        bfm.write_burst(base, BPC, resp, cyc);
        check(resp == RESP_OKAY, $sformatf("write set %0d chunk %0d OKAY", s, c));
      end
    // chunks 0 and 1 of each set were evicted: their ciphertext is in memory
    for (int s = 0; s < 2; s++) check_ct(s, 0, 0, 1);
    check(mem.rd(58'(TBASE >> 6)) != '0 && mem.rd(58'((TBASE + TSTR) >> 6)) != '0,
          "tags stored in both tag regions");
    // flush the rest; both sets write back at once
    @(negedge clk); flush_req = 1; @(negedge clk); flush_req = 0;
    wait (flush_done);
    @(posedge clk);
    for (int s = 0; s < 2; s++) for (int c = 0; c < NCH; c++) check_ct(s, c, 0, 1);
    check(mem.rd(58'(64'h0 >> 6)) != pat(64'h0, 0), "no plaintext in device memory");

    // ---- read everything back (chunks 0..1 miss and are verified)
    for (int s = 0; s < 2; s++)
      for (int c = 0; c < NCH; c++) begin
        logic [63:0] base;
        base = 64'(s) * RBYTES + 64'(c * C_MEM);
        bfm.read_burst(base, BPC, resp, cyc);
        ok = (resp == RESP_OKAY);
        for (int bt = 0; bt < BPC; bt++) if (bfm.rbuf[bt] !== pat(base + 64'(64 * bt), 0)) ok = 0;
        check(ok, $sformatf("read back set %0d chunk %0d", s, c));
      end
    check(!mem_auth_err, "no authentication error on honest memory");

    // ---- tamper: chunk 0 of set 1 (now evicted), one bit
    mem.mem[58'(RBYTES >> 6)] ^= 512'h8000;
    bfm.read_burst(RBYTES, BPC, resp, cyc);
    check(resp == RESP_SLVERR, "tampered chunk refused with SLVERR");
    check(mem_auth_err, "authentication error flagged");

    // ---- unmapped address
    bfm.read_burst(64'h10_0000, 1, resp, cyc);
    if (resp == RESP_DECERR) n_decerr++;
    check(resp == RESP_DECERR && bfm.rbuf[0] == '0, "unmapped read gets DECERR");
    bfm.wbuf[0] = '1;
    bfm.write_burst(64'h10_0000, 1, resp, cyc);
    if (resp == RESP_DECERR) n_decerr++;
    check(resp == RESP_DECERR, "unmapped write gets DECERR");

    // ---- every mechanism happened
    $display("mechanisms: hit %0d miss %0d evict %0d auth_fail %0d reg_write %0d reg_read %0d reg_auth_fail %0d contention %0d flush %0d decerr %0d",
             n_hit, n_miss, n_evict, n_afail, n_rw, n_rr, n_rfail, n_cont, n_flush, n_decerr);
    check(n_hit > 0, "buffer hit seen");
    check(n_miss > 0, "buffer miss seen");
    check(n_evict > 0, "eviction seen");
    check(n_afail > 0, "memory authentication failure seen");
    check(n_rw > 0, "register write seen");
    check(n_rr > 0, "register read seen");
    check(n_rfail > 0, "register authentication failure seen");
    check(n_cont > 0, "arbiter contention seen");
    check(n_flush > 0, "flush seen");
    check(n_decerr > 0, "decode error seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
