// engine_set: authenticated encryption of one memory region (Shield engine set).
//
// An engine set protects one address region of FPGA device memory. The
// accelerator reads and writes the region in plaintext over AXI4; what goes to
// DRAM is AES-CTR ciphertext, one 16-byte HMAC tag per chunk of C_MEM bytes
// (encrypt-then-MAC), and, if counters are enabled, the MAC also covers a
// per-chunk write counter kept on chip so that stale data replayed by an
// attacker is rejected. Following the paper, an engine set contains an AES
// engine, a MAC engine, an on-chip buffer with line size C_MEM, and counters;
// misses fetch the whole chunk and its tag, decrypt and authenticate it in
// parallel and fill the line; a dirty line is encrypted and re-tagged when it
// is evicted; writes either fill the line first or (WRITE_ZERO_FILL) start
// from a zeroed line.
//
// Choices of this design where the paper is silent:
//  * The buffer is direct mapped (chunk index modulo LINES).
//  * Chunk i of the region lives at REGION_BASE + i*C_MEM; its tag at
//    TAG_BASE + 16*i. The counter block for 16-byte word w of chunk i is
//    {IV_i, w}, with the 96-bit IV_i = IV_BASE + {ctr_i, i}: successive
//    chunks use successive IVs, and every write-back of a chunk uses a new one.
//  * The MAC is HMAC-SHA256 over {i (64 bit), ctr_i (64 bit)} || ciphertext,
//    truncated to its first 16 bytes.
//  * A chunk that fails verification is not cached; the beat that needed it
//    returns SLVERR (read data zero, write dropped) and auth_err is set.
//  * flush_req writes back all dirty lines (needed before the host reads
//    results from DRAM); flush_done pulses when finished.
//  * One accelerator burst is served at a time; reads have priority over
//    writes; bursts are INCR with full 64-byte beats (AxSIZE = 6).
//
// Timing: a buffer hit returns or accepts one beat per cycle. A miss costs
// the DRAM read of C_MEM bytes and one tag beat, then C_MEM/16 AES blocks
// (each 1 + NR*(16/SBOX_PAR+1) cycles plus 2) overlapped with the HMAC
// (see hmac_sha256), plus the same again first if a dirty line is evicted.
module engine_set
  import shield_pkg::*;
#(
  parameter int                   C_MEM           = 512,      // chunk size, bytes
  parameter int                   BUF_BYTES       = 16384,    // buffer size, bytes
  parameter logic [AXI_ADDR_W-1:0] REGION_BASE    = 64'h0,
  parameter logic [AXI_ADDR_W-1:0] REGION_BYTES   = 64'h0010_0000,
  parameter logic [AXI_ADDR_W-1:0] TAG_BASE       = 64'h8000_0000,
  parameter bit                   USE_COUNTERS    = 1'b1,
  parameter int                   CTR_W           = 8,
  parameter bit                   WRITE_ZERO_FILL = 1'b0,
  parameter int                   KEY_BITS        = 128,
  parameter int                   SBOX_PAR        = 16,
  parameter logic [95:0]          IV_BASE         = 96'h0
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [KEY_BITS-1:0] key,
  input  logic                key_update,
  // accelerator side (plaintext), AXI4 slave
  input  logic    s_ar_valid, output logic s_ar_ready, input  axi_ax_t s_ar,
  output logic    s_r_valid,  input  logic s_r_ready,  output axi_r_t  s_r,
  input  logic    s_aw_valid, output logic s_aw_ready, input  axi_ax_t s_aw,
  input  logic    s_w_valid,  output logic s_w_ready,  input  axi_w_t  s_w,
  output logic    s_b_valid,  input  logic s_b_ready,  output axi_b_t  s_b,
  // memory side (ciphertext and tags), AXI4 master
  output logic    m_ar_valid, input  logic m_ar_ready, output axi_ax_t m_ar,
  input  logic    m_r_valid,  output logic m_r_ready,  input  axi_r_t  m_r,
  output logic    m_aw_valid, input  logic m_aw_ready, output axi_ax_t m_aw,
  output logic    m_w_valid,  input  logic m_w_ready,  output axi_w_t  m_w,
  input  logic    m_b_valid,  output logic m_b_ready,  input  axi_b_t  m_b,
  // control and status
  input  logic    flush_req,
  output logic    flush_done,
  output logic    auth_err,
  output logic    ev_hit,
  output logic    ev_miss,
  output logic    ev_evict,
  output logic    ev_auth_fail
);

  localparam int BPL    = C_MEM / BEAT_BYTES;          // beats per line
  localparam int WPL    = C_MEM / 16;                  // 16-byte words per line
  localparam int LINES  = BUF_BYTES / C_MEM;
  localparam int CHUNKS = int'(REGION_BYTES / 64'(C_MEM));
  localparam int CW     = (CHUNKS > 1) ? $clog2(CHUNKS) : 1;
  localparam int LW     = (LINES > 1) ? $clog2(LINES) : 1;
  localparam int BAW    = $clog2(LINES * BPL) > 0 ? $clog2(LINES * BPL) : 1;

  initial begin
    assert (C_MEM % BEAT_BYTES == 0 && (C_MEM & (C_MEM - 1)) == 0)
      else $error("C_MEM must be a power of two of at least 64 bytes");
    assert (BUF_BYTES % C_MEM == 0 && LINES >= 1) else $error("BUF_BYTES must hold whole chunks");
  end

  typedef enum logic [4:0] {
    S_IDLE, S_RD_BEAT, S_WR_BEAT, S_B_RESP, S_MISS, S_FILL_START, S_ZERO,
    S_FI_AR, S_FI_R, S_FI_TAR, S_FI_TR, S_CR_INIT, S_CRYPT, S_FI_CHECK,
    S_EV_AW, S_EV_W, S_EV_B, S_EV_TAW, S_EV_TW, S_EV_TB, S_FLUSH
  } state_t;
  state_t state, ret_state, ev_ret;

  // ---------------------------------------------------------------- current burst
  logic [AXI_ID_W-1:0]   cur_id;
  logic [AXI_ADDR_W-1:0] cur_addr;
  logic [7:0]            beats_left;
  logic                  beat_err;   // the chunk of this beat failed verification
  logic                  wr_err;

  logic [AXI_ADDR_W-1:0] cur_off;
  logic [CW-1:0]         cur_chunk;
  logic [LW-1:0]         cur_line;
  logic [BAW-1:0]        cur_beat_addr;
  assign cur_off       = cur_addr - REGION_BASE;
  assign cur_chunk     = CW'(cur_off / 64'(C_MEM));
  assign cur_line      = LW'(int'(cur_chunk) % LINES);
  assign cur_beat_addr = BAW'(int'(cur_line) * BPL + int'((cur_off % 64'(C_MEM)) / 64'(BEAT_BYTES)));

  // ---------------------------------------------------------------- buffer
  logic [BAW-1:0]        ra_addr, rb_addr, b_waddr;
  logic [AXI_DATA_W-1:0] ra_data, rb_data, b_wdata;
  logic [AXI_STRB_W-1:0] b_wstrb;
  logic                  b_we;
  logic [LW-1:0]         m_line, m_wline;
  logic                  m_valid, m_dirty, m_we, m_wvalid, m_wdirty;
  logic [CW-1:0]         m_tag, m_wtag;

  line_buffer #(.LINES(LINES), .BEATS_PER_LINE(BPL), .TAG_W(CW)) u_buf (
    .clk, .rst_n,
    .ra_addr, .ra_data, .rb_addr, .rb_data,
    .we(b_we), .waddr(b_waddr), .wstrb(b_wstrb), .wdata(b_wdata),
    .m_line, .m_valid, .m_dirty, .m_tag,
    .m_we, .m_wline, .m_wvalid, .m_wdirty, .m_wtag,
    .m_clear_all(key_update)
  );

  // ---------------------------------------------------------------- operation on a line
  logic [CW-1:0]  op_chunk;
  logic [LW-1:0]  op_line;
  logic           op_enc;        // 1: encrypt for write-back, 0: decrypt after fill
  logic [CTR_W-1:0] ctr_val;
  logic [7:0]     dbeat;         // DRAM beat counter
  logic [127:0]   dram_tag;
  logic [127:0]   mac_tag;
  logic           mac_have;
  logic [LW-1:0]  fl_line;
  logic           flush_pend;

  // ---------------------------------------------------------------- counters
  logic [CTR_W-1:0] ctr_rd;
  logic             ctr_inc;
  generate
    if (USE_COUNTERS) begin : g_ctr
      counter_store #(.ENTRIES(CHUNKS), .CTR_W(CTR_W)) u_ctr (
        .clk, .rst_n, .rd_idx(op_chunk), .rd_ctr(ctr_rd), .inc(ctr_inc), .inc_idx(op_chunk));
    end else begin : g_noctr
      assign ctr_rd = '0;
    end
  endgenerate

  // ---------------------------------------------------------------- crypto engines
  localparam int WPW = (WPL > 1) ? $clog2(WPL + 1) : 1;
  logic [WPW-1:0] a_ptr;          // next word for AES
  logic           a_busy;         // a counter block is in the AES engine
  logic [WPW:0]   m_ptr;          // next MAC word: 0 = header, w+1 = data word w

  logic [95:0]  iv_i;
  assign iv_i = IV_BASE + {32'(ctr_val), 64'(op_chunk)};

  logic         aes_in_valid, aes_in_ready, aes_out_valid, aes_out_ready, aes_key_ready;
  logic [127:0] aes_in, aes_out;
  aes_core #(.KEY_BITS(KEY_BITS), .SBOX_PAR(SBOX_PAR)) u_aes (
    .clk, .rst_n, .key_load(key_update), .key, .key_ready(aes_key_ready),
    .in_valid(aes_in_valid), .in_ready(aes_in_ready), .in_block(aes_in),
    .out_valid(aes_out_valid), .out_ready(aes_out_ready), .out_block(aes_out));

  logic         mac_start, mac_in_valid, mac_in_ready, mac_out_valid, mac_busy;
  logic [127:0] mac_in;
  logic [255:0] mac_out;
  hmac_sha256 u_mac (
    .clk, .rst_n, .key(256'(key) << (256 - KEY_BITS)), .start(mac_start), .msg_len(32'(16 + C_MEM)),
    .busy(mac_busy), .in_valid(mac_in_valid), .in_ready(mac_in_ready), .in_data(mac_in),
    .out_valid(mac_out_valid), .out_ready(1'b1), .tag(mac_out));

  // word helpers
  logic [BAW-1:0] a_beat, mword_beat;
  logic [1:0]     a_lane, m_lane;
  logic [WPW:0]   mword;
  assign a_beat     = BAW'(int'(op_line) * BPL + int'(a_ptr) / WORDS_PER_BEAT);
  assign a_lane     = 2'(int'(a_ptr) % WORDS_PER_BEAT);
  assign mword      = m_ptr - 1'b1;
  assign mword_beat = BAW'(int'(op_line) * BPL + int'(mword) / WORDS_PER_BEAT);
  assign m_lane     = 2'(int'(mword) % WORDS_PER_BEAT);

  logic crypt_active;
  assign crypt_active = (state == S_CRYPT);

  // AES: request the keystream block for word a_ptr, then combine it with the
  // word. When decrypting, the ciphertext word is overwritten only after the
  // MAC engine has taken it; when encrypting, the MAC takes a word only after
  // it has been encrypted.
  logic aes_write;
  assign aes_in        = {iv_i, 32'(a_ptr)};
  assign aes_in_valid  = crypt_active && !a_busy && (int'(a_ptr) < WPL);
  assign aes_write     = crypt_active && a_busy && aes_out_valid &&
                         (op_enc || (int'(m_ptr) > int'(a_ptr) + 1));
  assign aes_out_ready = aes_write;

  assign mac_in        = (m_ptr == '0) ? {64'(op_chunk), 64'(ctr_val)}
                                       : ra_data[128*m_lane +: 128];
  assign mac_in_valid  = crypt_active && (int'(m_ptr) <= WPL) &&
                         (m_ptr == '0 || !op_enc || int'(a_ptr) > int'(mword));
  assign mac_start     = (state == S_CR_INIT);

  // ---------------------------------------------------------------- buffer port muxes
  always_comb begin
    // read port A: accelerator read beats, MAC words, write-back beats
    unique case (state)
      S_CRYPT: ra_addr = mword_beat;
      S_EV_W:  ra_addr = BAW'(int'(op_line) * BPL + int'(dbeat));
      default: ra_addr = cur_beat_addr;
    endcase
    rb_addr = a_beat;
    // write port
    b_we    = 1'b0;
    b_waddr = cur_beat_addr;
    b_wstrb = '1;
    b_wdata = s_w.data;
    if (aes_write) begin
      b_we    = 1'b1;
      b_waddr = a_beat;
      b_wstrb = AXI_STRB_W'(16'hffff) << (16 * a_lane);
      b_wdata = {WORDS_PER_BEAT{rb_data[128*a_lane +: 128] ^ aes_out}};
    end else if (state == S_FI_R) begin
      b_we    = m_r_valid;
      b_waddr = BAW'(int'(op_line) * BPL + int'(dbeat));
      b_wdata = m_r.data;
    end else if (state == S_ZERO) begin
      b_we    = 1'b1;
      b_waddr = BAW'(int'(op_line) * BPL + int'(dbeat));
      b_wdata = '0;
    end else if (state == S_WR_BEAT) begin
      b_we    = s_w_valid && !beat_err && m_valid && (m_tag == cur_chunk);
      b_wstrb = s_w.strb;
    end
    // tag lookup
    m_line = (state == S_FLUSH) ? fl_line : cur_line;
  end

  logic cur_hit;
  assign cur_hit = m_valid && (m_tag == cur_chunk);

  // ---------------------------------------------------------------- accelerator channels
  assign s_ar_ready = (state == S_IDLE) && aes_key_ready && !flush_pend;
  assign s_aw_ready = (state == S_IDLE) && aes_key_ready && !flush_pend && !s_ar_valid;
  assign s_r_valid  = (state == S_RD_BEAT) && (cur_hit || beat_err);
  assign s_r.id     = cur_id;
  assign s_r.data   = beat_err ? '0 : ra_data;
  assign s_r.resp   = beat_err ? RESP_SLVERR : RESP_OKAY;
  assign s_r.last   = (beats_left == 8'd0);
  assign s_w_ready  = (state == S_WR_BEAT) && (cur_hit || beat_err);
  assign s_b_valid  = (state == S_B_RESP);
  assign s_b.id     = cur_id;
  assign s_b.resp   = wr_err ? RESP_SLVERR : RESP_OKAY;

  // ---------------------------------------------------------------- memory channels
  logic [AXI_ADDR_W-1:0] tag_addr;
  logic [1:0]            tag_lane;
  assign tag_addr = TAG_BASE + ((64'(op_chunk) >> 2) << 6);
  assign tag_lane = 2'(op_chunk);

  always_comb begin
    m_ar = '{id: '0, addr: REGION_BASE + 64'(op_chunk) * 64'(C_MEM), len: 8'(BPL - 1),
             size: 3'd6, burst: 2'b01};
    if (state == S_FI_TAR) begin
      m_ar.addr = tag_addr;
      m_ar.len  = 8'd0;
    end
    m_aw = '{id: '0, addr: REGION_BASE + 64'(op_chunk) * 64'(C_MEM), len: 8'(BPL - 1),
             size: 3'd6, burst: 2'b01};
    if (state == S_EV_TAW) begin
      m_aw.addr = tag_addr;
      m_aw.len  = 8'd0;
    end
    m_w.data = ra_data;
    m_w.strb = '1;
    m_w.last = (int'(dbeat) == BPL - 1);
    if (state == S_EV_TW) begin
      m_w.data = {WORDS_PER_BEAT{mac_tag}};
      m_w.strb = AXI_STRB_W'(16'hffff) << (16 * tag_lane);
      m_w.last = 1'b1;
    end
  end
  assign m_ar_valid = (state == S_FI_AR) || (state == S_FI_TAR);
  assign m_r_ready  = (state == S_FI_R) || (state == S_FI_TR);
  assign m_aw_valid = (state == S_EV_AW) || (state == S_EV_TAW);
  assign m_w_valid  = (state == S_EV_W) || (state == S_EV_TW);
  assign m_b_ready  = (state == S_EV_B) || (state == S_EV_TB);

  // ---------------------------------------------------------------- control
  always_comb begin
    m_we     = 1'b0;
    m_wline  = op_line;
    m_wvalid = 1'b0;
    m_wdirty = 1'b0;
    m_wtag   = op_chunk;
    ctr_inc  = 1'b0;
    if (state == S_WR_BEAT && s_w_valid && s_w_ready && !beat_err) begin
      m_we = 1'b1; m_wline = cur_line; m_wvalid = 1'b1; m_wdirty = 1'b1; m_wtag = cur_chunk;
    end else if (state == S_FI_CHECK) begin
      m_we = 1'b1; m_wvalid = (mac_tag == dram_tag);
    end else if (state == S_ZERO && int'(dbeat) == BPL - 1) begin
      m_we = 1'b1; m_wvalid = 1'b1;
    end else if (state == S_EV_TB && m_b_valid) begin
      m_we = 1'b1; m_wvalid = 1'b0;        // the line now holds ciphertext
      ctr_inc = USE_COUNTERS;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      ret_state  <= S_IDLE;
      ev_ret     <= S_IDLE;
      cur_id     <= '0;
      cur_addr   <= '0;
      beats_left <= '0;
      beat_err   <= 1'b0;
      wr_err     <= 1'b0;
      op_chunk   <= '0;
      op_line    <= '0;
      op_enc     <= 1'b0;
      ctr_val    <= '0;
      dbeat      <= '0;
      dram_tag   <= '0;
      mac_tag    <= '0;
      mac_have   <= 1'b0;
      a_ptr      <= '0;
      a_busy     <= 1'b0;
      m_ptr      <= '0;
      fl_line    <= '0;
      flush_pend <= 1'b0;
      flush_done <= 1'b0;
      auth_err   <= 1'b0;
      ev_hit     <= 1'b0;
      ev_miss    <= 1'b0;
      ev_evict   <= 1'b0;
      ev_auth_fail <= 1'b0;
    end else begin
      flush_done   <= 1'b0;
      ev_hit       <= 1'b0;
      ev_miss      <= 1'b0;
      ev_evict     <= 1'b0;
      ev_auth_fail <= 1'b0;
      if (flush_req) flush_pend <= 1'b1;

      unique case (state)
        S_IDLE: begin
          if (flush_pend && aes_key_ready) begin
            fl_line <= '0;
            state   <= S_FLUSH;
          end else if (s_ar_valid && s_ar_ready) begin
            cur_id <= s_ar.id; cur_addr <= s_ar.addr; beats_left <= s_ar.len;
            beat_err <= 1'b0;
            state <= S_RD_BEAT;
          end else if (s_aw_valid && s_aw_ready) begin
            cur_id <= s_aw.id; cur_addr <= s_aw.addr; beats_left <= s_aw.len;
            beat_err <= 1'b0; wr_err <= 1'b0;
            state <= S_WR_BEAT;
          end
        end

        S_RD_BEAT: begin
          if (s_r_valid) begin
            if (s_r_ready) begin
              ev_hit   <= !beat_err;
              beat_err <= 1'b0;
              cur_addr <= cur_addr + 64'(BEAT_BYTES);
              beats_left <= beats_left - 8'd1;
              if (beats_left == 8'd0) state <= S_IDLE;
            end
          end else begin
            ret_state <= S_RD_BEAT;
            state     <= S_MISS;
          end
        end

        S_WR_BEAT: begin
          if (s_w_ready) begin
            if (s_w_valid) begin
              ev_hit   <= !beat_err;
              if (beat_err) wr_err <= 1'b1;
              beat_err <= 1'b0;
              cur_addr <= cur_addr + 64'(BEAT_BYTES);
              beats_left <= beats_left - 8'd1;
              if (s_w.last || beats_left == 8'd0) state <= S_B_RESP;
            end
          end else begin
            ret_state <= S_WR_BEAT;
            state     <= S_MISS;
          end
        end

        S_B_RESP: if (s_b_ready) state <= S_IDLE;

        S_MISS: begin
          ev_miss <= 1'b1;
          if (m_valid && m_dirty) begin
            op_chunk <= m_tag;
            op_line  <= cur_line;
            op_enc   <= 1'b1;
            ev_ret   <= S_FILL_START;
            state    <= S_CR_INIT;
          end else begin
            state <= S_FILL_START;
          end
        end

        S_FILL_START: begin
          op_chunk <= cur_chunk;
          op_line  <= cur_line;
          op_enc   <= 1'b0;
          dbeat    <= '0;
          state    <= (WRITE_ZERO_FILL && ret_state == S_WR_BEAT) ? S_ZERO : S_FI_AR;
        end

        S_ZERO: begin
          dbeat <= dbeat + 8'd1;
          if (int'(dbeat) == BPL - 1) state <= ret_state;
        end

        S_FI_AR: if (m_ar_ready) state <= S_FI_R;
        S_FI_R: if (m_r_valid) begin
          dbeat <= dbeat + 8'd1;
          if (m_r.last) state <= S_FI_TAR;
        end
        S_FI_TAR: if (m_ar_ready) state <= S_FI_TR;
        S_FI_TR: if (m_r_valid) begin
          dram_tag <= m_r.data[128*tag_lane +: 128];
          state    <= S_CR_INIT;
        end

        S_CR_INIT: begin
          ctr_val  <= (op_enc && USE_COUNTERS) ? ctr_rd + 1'b1 : ctr_rd;
          a_ptr    <= '0;
          a_busy   <= 1'b0;
          m_ptr    <= '0;
          mac_have <= 1'b0;
          state    <= S_CRYPT;
        end

        S_CRYPT: begin
          if (aes_in_valid && aes_in_ready) a_busy <= 1'b1;
          if (aes_write) begin
            a_busy <= 1'b0;
            a_ptr  <= a_ptr + 1'b1;
          end
          if (mac_in_valid && mac_in_ready) m_ptr <= m_ptr + 1'b1;
          if (mac_out_valid) begin
            mac_tag  <= mac_out[255:128];
            mac_have <= 1'b1;
          end
          if (mac_have && int'(a_ptr) == WPL) begin
            dbeat <= '0;
            state <= op_enc ? S_EV_AW : S_FI_CHECK;
          end
        end

        S_FI_CHECK: begin
          if (mac_tag != dram_tag) begin
            beat_err     <= 1'b1;
            auth_err     <= 1'b1;
            ev_auth_fail <= 1'b1;
          end
          state <= ret_state;
        end

        S_EV_AW: if (m_aw_ready) state <= S_EV_W;
        S_EV_W: if (m_w_ready) begin
          dbeat <= dbeat + 8'd1;
          if (int'(dbeat) == BPL - 1) state <= S_EV_B;
        end
        S_EV_B: if (m_b_valid) state <= S_EV_TAW;
        S_EV_TAW: if (m_aw_ready) state <= S_EV_TW;
        S_EV_TW: if (m_w_ready) state <= S_EV_TB;
        S_EV_TB: if (m_b_valid) begin
          ev_evict <= 1'b1;
          state    <= ev_ret;
        end

        S_FLUSH: begin
          if (m_valid && m_dirty) begin
            op_chunk <= m_tag;
            op_line  <= fl_line;
            op_enc   <= 1'b1;
            ev_ret   <= S_FLUSH;
            state    <= S_CR_INIT;
          end else if (int'(fl_line) == LINES - 1) begin
            flush_pend <= 1'b0;
            flush_done <= 1'b1;
            state      <= S_IDLE;
          end else begin
            fl_line <= fl_line + 1'b1;
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------------------------------------------------------- AXI rules
  // A master holds valid and the payload stable until the handshake.
  a_ar_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_ar_valid && !m_ar_ready |=> m_ar_valid && $stable(m_ar));
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    m_aw_valid && !m_aw_ready |=> m_aw_valid && $stable(m_aw));
  a_r_stable: assert property (@(posedge clk) disable iff (!rst_n)
    s_r_valid && !s_r_ready |=> s_r_valid && $stable(s_r));

endmodule
