// shield_top: the Shield, a security wrapper between an FPGA accelerator and
// the cloud provider's Shell.
//
// Everything outside the Shield (Shell, host software, device memory) is
// untrusted. The Shield exposes to the accelerator the same kinds of ports the
// Shell would (AXI4-Lite registers, AXI4 device memory) and makes sure that
// whatever leaves it is encrypted and authenticated under the data owner's
// Data Encryption Key:
//  * key_storage holds that key once the (external) Load Key unwrapping has
//    produced it, and re-keys every engine when it changes;
//  * reg_interface decrypts and authenticates host register commands arriving
//    over AXI4-Lite and encrypts and tags register reads;
//  * the memory interface: burst_decoder looks each accelerator burst up in
//    the partition map and hands it to one of NUM_SETS engine_set instances,
//    each protecting its own region with AES-CTR, HMAC tags, a buffer and
//    replay counters; axi_arbiter merges the engine sets' DRAM traffic onto
//    the Shell's AXI4 port.
// This structure follows the paper's Shield architecture figure. The default
// configuration is this design's pick among the paper's evaluated ones: two
// engine sets of 1 MiB each (as in the figure), 512-byte chunks, 16 KiB
// buffers, AES-128 with 16x S-box parallelism, HMAC-SHA256, 8-bit counters.
//
// Memory layout (this design's choice): engine set i owns plaintext addresses
// [i*REGION_BYTES, (i+1)*REGION_BYTES); its ciphertext lives at the same
// addresses in device memory and its tags at TAG_BASE + i*TAG_STRIDE. Each set
// gets a distinct IV base {i, 80'h0} so no two sets share a keystream.
// flush_req makes every engine set write back its dirty lines; flush_done
// pulses once all have finished.
module shield_top
  import shield_pkg::*;
#(
  parameter int                    NUM_SETS     = 2,
  parameter int                    NUM_REGS     = 32,
  parameter int                    KEY_BITS     = 128,
  parameter int                    SBOX_PAR     = 16,
  parameter int                    C_MEM        = 512,
  parameter int                    BUF_BYTES    = 16384,
  parameter logic [AXI_ADDR_W-1:0] REGION_BYTES = 64'h0010_0000,
  parameter logic [AXI_ADDR_W-1:0] TAG_BASE     = 64'h0000_0001_0000_0000,
  parameter logic [AXI_ADDR_W-1:0] TAG_STRIDE   = 64'h0000_0000_0100_0000,
  parameter bit                    USE_COUNTERS = 1'b1,
  parameter int                    CTR_W        = 8,
  parameter logic [NUM_SETS-1:0]   ZERO_FILL    = '0,
  localparam int IW = $clog2(NUM_REGS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // Data Encryption Key from the Load Key unwrapping
  input  logic                key_load_valid,
  input  logic [KEY_BITS-1:0] key_load_data,
  input  logic                key_zeroize,
  // AXI4-Lite from the Shell (host registers)
  input  logic                    sh_awvalid,
  output logic                    sh_awready,
  input  logic [AXIL_ADDR_W-1:0]  sh_awaddr,
  input  logic                    sh_wvalid,
  output logic                    sh_wready,
  input  logic [AXIL_DATA_W-1:0]  sh_wdata,
  input  logic [3:0]              sh_wstrb,
  output logic                    sh_bvalid,
  input  logic                    sh_bready,
  output logic [1:0]              sh_bresp,
  input  logic                    sh_arvalid,
  output logic                    sh_arready,
  input  logic [AXIL_ADDR_W-1:0]  sh_araddr,
  output logic                    sh_rvalid,
  input  logic                    sh_rready,
  output logic [AXIL_DATA_W-1:0]  sh_rdata,
  output logic [1:0]              sh_rresp,
  // accelerator registers (plaintext)
  output logic [NUM_REGS-1:0][31:0] acc_reg_q,
  input  logic                    acc_reg_we,
  input  logic [IW-1:0]           acc_reg_idx,
  input  logic [31:0]             acc_reg_wdata,
  // accelerator device-memory port (plaintext), AXI4 slave
  input  logic    acc_ar_valid, output logic acc_ar_ready, input  axi_ax_t acc_ar,
  output logic    acc_r_valid,  input  logic acc_r_ready,  output axi_r_t  acc_r,
  input  logic    acc_aw_valid, output logic acc_aw_ready, input  axi_ax_t acc_aw,
  input  logic    acc_w_valid,  output logic acc_w_ready,  input  axi_w_t  acc_w,
  output logic    acc_b_valid,  input  logic acc_b_ready,  output axi_b_t  acc_b,
  // Shell device-memory port (ciphertext and tags), AXI4 master
  output logic    mem_ar_valid, input  logic mem_ar_ready, output axi_ax_t mem_ar,
  input  logic    mem_r_valid,  output logic mem_r_ready,  input  axi_r_t  mem_r,
  output logic    mem_aw_valid, input  logic mem_aw_ready, output axi_ax_t mem_aw,
  output logic    mem_w_valid,  input  logic mem_w_ready,  output axi_w_t  mem_w,
  input  logic    mem_b_valid,  output logic mem_b_ready,  input  axi_b_t  mem_b,
  // control and status
  input  logic                flush_req,
  output logic                flush_done,
  output logic                key_valid,
  output logic                mem_auth_err,
  output logic [NUM_SETS-1:0] ev_hit,
  output logic [NUM_SETS-1:0] ev_miss,
  output logic [NUM_SETS-1:0] ev_evict,
  output logic [NUM_SETS-1:0] ev_auth_fail,
  output logic                ev_reg_write,
  output logic                ev_reg_read,
  output logic                ev_reg_auth_fail,
  output logic                ev_arb_contended
);

  function automatic logic [NUM_SETS-1:0][AXI_ADDR_W-1:0] region_bases();
    for (int i = 0; i < NUM_SETS; i++) region_bases[i] = AXI_ADDR_W'(i) * REGION_BYTES;
  endfunction
  function automatic logic [NUM_SETS-1:0][AXI_ADDR_W-1:0] region_sizes();
    for (int i = 0; i < NUM_SETS; i++) region_sizes[i] = REGION_BYTES;
  endfunction
  localparam logic [NUM_SETS-1:0][AXI_ADDR_W-1:0] BASES = region_bases();
  localparam logic [NUM_SETS-1:0][AXI_ADDR_W-1:0] SIZES = region_sizes();

  // ------------------------------------------------ key storage
  logic [KEY_BITS-1:0] key;
  logic                key_update;
  key_storage #(.KEY_BITS(KEY_BITS)) u_keys (
    .clk, .rst_n, .load_valid(key_load_valid), .load_key(key_load_data), .zeroize(key_zeroize),
    .key, .key_valid, .key_update);

  // ------------------------------------------------ register interface
  reg_interface #(.NUM_REGS(NUM_REGS), .KEY_BITS(KEY_BITS), .SBOX_PAR(SBOX_PAR)) u_regs (
    .clk, .rst_n, .key, .key_update,
    .s_awvalid(sh_awvalid), .s_awready(sh_awready), .s_awaddr(sh_awaddr),
    .s_wvalid(sh_wvalid), .s_wready(sh_wready), .s_wdata(sh_wdata), .s_wstrb(sh_wstrb),
    .s_bvalid(sh_bvalid), .s_bready(sh_bready), .s_bresp(sh_bresp),
    .s_arvalid(sh_arvalid), .s_arready(sh_arready), .s_araddr(sh_araddr),
    .s_rvalid(sh_rvalid), .s_rready(sh_rready), .s_rdata(sh_rdata), .s_rresp(sh_rresp),
    .reg_q(acc_reg_q), .acc_we(acc_reg_we), .acc_idx(acc_reg_idx), .acc_wdata(acc_reg_wdata),
    .ev_reg_write, .ev_reg_read, .ev_reg_auth_fail);

  // ------------------------------------------------ memory interface
  logic [NUM_SETS-1:0] d_ar_valid, d_ar_ready, d_r_valid, d_r_ready;
  logic [NUM_SETS-1:0] d_aw_valid, d_aw_ready, d_w_valid, d_w_ready, d_b_valid, d_b_ready;
  axi_ax_t d_ar, d_aw;
  axi_w_t  d_w;
  axi_r_t  d_r [NUM_SETS];
  axi_b_t  d_b [NUM_SETS];

  burst_decoder #(.NUM_SETS(NUM_SETS), .REGION_BASE(BASES), .REGION_BYTES(SIZES)) u_dec (
    .clk, .rst_n,
    .s_ar_valid(acc_ar_valid), .s_ar_ready(acc_ar_ready), .s_ar(acc_ar),
    .s_r_valid(acc_r_valid), .s_r_ready(acc_r_ready), .s_r(acc_r),
    .s_aw_valid(acc_aw_valid), .s_aw_ready(acc_aw_ready), .s_aw(acc_aw),
    .s_w_valid(acc_w_valid), .s_w_ready(acc_w_ready), .s_w(acc_w),
    .s_b_valid(acc_b_valid), .s_b_ready(acc_b_ready), .s_b(acc_b),
    .m_ar_valid(d_ar_valid), .m_ar_ready(d_ar_ready), .m_ar(d_ar),
    .m_r_valid(d_r_valid), .m_r_ready(d_r_ready), .m_r(d_r),
    .m_aw_valid(d_aw_valid), .m_aw_ready(d_aw_ready), .m_aw(d_aw),
    .m_w_valid(d_w_valid), .m_w_ready(d_w_ready), .m_w(d_w),
    .m_b_valid(d_b_valid), .m_b_ready(d_b_ready), .m_b(d_b));

  logic [NUM_SETS-1:0] e_ar_valid, e_ar_ready, e_r_valid, e_r_ready;
  logic [NUM_SETS-1:0] e_aw_valid, e_aw_ready, e_w_valid, e_w_ready, e_b_valid, e_b_ready;
  axi_ax_t e_ar [NUM_SETS];
  axi_ax_t e_aw [NUM_SETS];
  axi_w_t  e_w  [NUM_SETS];
  axi_r_t  e_r;
  axi_b_t  e_b;
  logic [NUM_SETS-1:0] set_flush_done, set_auth_err, flushed;

  for (genvar i = 0; i < NUM_SETS; i++) begin : g_set
    engine_set #(
      .C_MEM(C_MEM), .BUF_BYTES(BUF_BYTES),
      .REGION_BASE(BASES[i]), .REGION_BYTES(REGION_BYTES),
      .TAG_BASE(TAG_BASE + AXI_ADDR_W'(i) * TAG_STRIDE),
      .USE_COUNTERS(USE_COUNTERS), .CTR_W(CTR_W), .WRITE_ZERO_FILL(ZERO_FILL[i]),
      .KEY_BITS(KEY_BITS), .SBOX_PAR(SBOX_PAR), .IV_BASE({16'(i), 80'h0})
    ) u_es (
      .clk, .rst_n, .key, .key_update,
      .s_ar_valid(d_ar_valid[i]), .s_ar_ready(d_ar_ready[i]), .s_ar(d_ar),
      .s_r_valid(d_r_valid[i]), .s_r_ready(d_r_ready[i]), .s_r(d_r[i]),
      .s_aw_valid(d_aw_valid[i]), .s_aw_ready(d_aw_ready[i]), .s_aw(d_aw),
      .s_w_valid(d_w_valid[i]), .s_w_ready(d_w_ready[i]), .s_w(d_w),
      .s_b_valid(d_b_valid[i]), .s_b_ready(d_b_ready[i]), .s_b(d_b[i]),
      .m_ar_valid(e_ar_valid[i]), .m_ar_ready(e_ar_ready[i]), .m_ar(e_ar[i]),
      .m_r_valid(e_r_valid[i]), .m_r_ready(e_r_ready[i]), .m_r(e_r),
      .m_aw_valid(e_aw_valid[i]), .m_aw_ready(e_aw_ready[i]), .m_aw(e_aw[i]),
      .m_w_valid(e_w_valid[i]), .m_w_ready(e_w_ready[i]), .m_w(e_w[i]),
      .m_b_valid(e_b_valid[i]), .m_b_ready(e_b_ready[i]), .m_b(e_b),
      .flush_req, .flush_done(set_flush_done[i]), .auth_err(set_auth_err[i]),
      .ev_hit(ev_hit[i]), .ev_miss(ev_miss[i]), .ev_evict(ev_evict[i]),
      .ev_auth_fail(ev_auth_fail[i]));
  end

  logic rd_cont, wr_cont;
  axi_arbiter #(.NUM_M(NUM_SETS)) u_arb (
    .clk, .rst_n,
    .s_ar_valid(e_ar_valid), .s_ar_ready(e_ar_ready), .s_ar(e_ar),
    .s_r_valid(e_r_valid), .s_r_ready(e_r_ready), .s_r(e_r),
    .s_aw_valid(e_aw_valid), .s_aw_ready(e_aw_ready), .s_aw(e_aw),
    .s_w_valid(e_w_valid), .s_w_ready(e_w_ready), .s_w(e_w),
    .s_b_valid(e_b_valid), .s_b_ready(e_b_ready), .s_b(e_b),
    .m_ar_valid(mem_ar_valid), .m_ar_ready(mem_ar_ready), .m_ar(mem_ar),
    .m_r_valid(mem_r_valid), .m_r_ready(mem_r_ready), .m_r(mem_r),
    .m_aw_valid(mem_aw_valid), .m_aw_ready(mem_aw_ready), .m_aw(mem_aw),
    .m_w_valid(mem_w_valid), .m_w_ready(mem_w_ready), .m_w(mem_w),
    .m_b_valid(mem_b_valid), .m_b_ready(mem_b_ready), .m_b(mem_b),
    .rd_contended(rd_cont), .wr_contended(wr_cont));
  assign ev_arb_contended = rd_cont | wr_cont;

  // flush completes when every engine set has reported
  logic flushing;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flushing   <= 1'b0;
      flushed    <= '0;
      flush_done <= 1'b0;
    end else begin
      flush_done <= 1'b0;
      if (flush_req) begin
        flushing <= 1'b1;
        flushed  <= '0;
      end else if (flushing) begin
        if (&(flushed | set_flush_done)) begin
          flushing   <= 1'b0;
          flush_done <= 1'b1;
        end
        flushed <= flushed | set_flush_done;
      end
    end
  end
  assign mem_auth_err = |set_auth_err;

endmodule
