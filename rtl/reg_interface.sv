// reg_interface: the Shield's authenticated, encrypted register interface.
//
// The host reaches the accelerator's registers over AXI4-Lite through the
// untrusted Shell, so every register command travels encrypted and tagged
// under the Data Encryption Key. Following the paper, the interface consists
// of an AXI-L controller, an authenticated-encryption unit (one AES engine in
// counter mode and one HMAC engine) and a plaintext register file. The paper
// also offers hiding register addresses behind one common address; this
// design always does so: the register index travels inside the ciphertext.
//
// Command format (this design's choice). The host writes a 16-byte ciphertext
// CT, its 16-byte tag TAG and a 96-bit IV into staging registers, then writes
// CMD. The Shield checks TAG == HMAC(K, {IV, 32'h0} || CT)[first 16 bytes],
// then decrypts PT = CT ^ AES(K, {IV, 32'h0}), where
//   PT[127:96] = opcode (bit 96: 1 = write, 0 = read), PT[95:64] = register
//   index, PT[63:32] = data, PT[31:0] = 0.
// A write updates the register. A read answers with PT' = {0, index, value, 0}
// encrypted under a fresh Shield IV {1, 31'h0, n} (n counts responses; host
// IVs must have bit 95 clear so the two never collide) and tagged the same way;
// the host reads CT', TAG' and IV' back from the same offsets. A failed tag,
// an IV with bit 95 set or an index past NUM_REGS sets STATUS.auth_err and
// leaves the registers untouched. The interface does not stop a replayed
// command: the paper does not ask for it.
//
// AXI4-Lite map (byte offsets): 0x00-0x0C CT (word 0 = bits 127:96),
// 0x10-0x1C TAG, 0x20-0x28 IV, 0x30 CMD (write starts), 0x34 STATUS
// {resp_valid, auth_err, busy}. Writes need AW and W together; writes are held
// off while a command runs.
// Timing: a command takes one HMAC over 32 bytes (5 compressions, about 340
// cycles) with the AES block overlapped; a read adds one AES block and one
// more HMAC.
module reg_interface
  import shield_pkg::*;
#(
  parameter int NUM_REGS = 32,
  parameter int KEY_BITS = 128,
  parameter int SBOX_PAR = 16,
  localparam int IW = $clog2(NUM_REGS)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic [KEY_BITS-1:0] key,
  input  logic                key_update,
  // AXI4-Lite slave (from the Shell)
  input  logic                    s_awvalid,
  output logic                    s_awready,
  input  logic [AXIL_ADDR_W-1:0]  s_awaddr,
  input  logic                    s_wvalid,
  output logic                    s_wready,
  input  logic [AXIL_DATA_W-1:0]  s_wdata,
  input  logic [3:0]              s_wstrb,
  output logic                    s_bvalid,
  input  logic                    s_bready,
  output logic [1:0]              s_bresp,
  input  logic                    s_arvalid,
  output logic                    s_arready,
  input  logic [AXIL_ADDR_W-1:0]  s_araddr,
  output logic                    s_rvalid,
  input  logic                    s_rready,
  output logic [AXIL_DATA_W-1:0]  s_rdata,
  output logic [1:0]              s_rresp,
  // accelerator side of the register file
  output logic [NUM_REGS-1:0][31:0] reg_q,
  input  logic                    acc_we,
  input  logic [IW-1:0]           acc_idx,
  input  logic [31:0]             acc_wdata,
  // status
  output logic                    ev_reg_write,
  output logic                    ev_reg_read,
  output logic                    ev_reg_auth_fail
);

  typedef enum logic [2:0] {R_IDLE, R_VER, R_CHECK, R_RENC, R_RMAC, R_FIN} rstate_t;
  rstate_t state;

  logic [127:0] ct_in, tag_in, ct_out, tag_out;
  logic [95:0]  iv_in, iv_out;
  logic [63:0]  resp_n;
  logic         auth_err, resp_valid;
  logic [127:0] ks;
  logic         a_issued, a_have, m_have;
  logic [1:0]   mw;
  logic [127:0] mtag;
  logic [127:0] pt_resp;

  // ------------------------------------------------ register file
  logic          h_we;
  logic [IW-1:0] h_idx;
  logic [31:0]   h_wdata, h_rdata;
  reg_file #(.NUM_REGS(NUM_REGS)) u_rf (
    .clk, .rst_n, .h_we, .h_idx, .h_wdata, .h_rdata,
    .a_we(acc_we), .a_idx(acc_idx), .a_wdata(acc_wdata), .reg_q);

  // ------------------------------------------------ engines
  logic         aes_in_valid, aes_in_ready, aes_out_valid, aes_key_ready;
  logic [127:0] aes_in, aes_out;
  aes_core #(.KEY_BITS(KEY_BITS), .SBOX_PAR(SBOX_PAR)) u_aes (
    .clk, .rst_n, .key_load(key_update), .key, .key_ready(aes_key_ready),
    .in_valid(aes_in_valid), .in_ready(aes_in_ready), .in_block(aes_in),
    .out_valid(aes_out_valid), .out_ready(1'b1), .out_block(aes_out));

  logic         mac_start, mac_in_valid, mac_in_ready, mac_out_valid, mac_busy;
  logic [127:0] mac_in;
  logic [255:0] mac_out;
  hmac_sha256 u_mac (
    .clk, .rst_n, .key(256'(key) << (256 - KEY_BITS)), .start(mac_start), .msg_len(32'd32),
    .busy(mac_busy), .in_valid(mac_in_valid), .in_ready(mac_in_ready), .in_data(mac_in),
    .out_valid(mac_out_valid), .out_ready(1'b1), .tag(mac_out));

  logic in_ver;
  assign in_ver  = (state == R_VER);

  assign aes_in       = in_ver ? {iv_in, 32'h0} : {iv_out, 32'h0};
  assign aes_in_valid = (in_ver || state == R_RENC) && !a_issued;
  assign mac_in       = (mw == 2'd0) ? {(in_ver ? iv_in : iv_out), 32'h0} : (in_ver ? ct_in : ct_out);
  assign mac_in_valid = (in_ver || state == R_RMAC) && (mw < 2'd2);

  // decrypted command
  logic [127:0] pt;
  logic         cmd_write, cmd_ok;
  logic [31:0]  cmd_idx;
  assign pt        = ct_in ^ ks;
  assign cmd_write = pt[96];
  assign cmd_idx   = pt[95:64];
  assign cmd_ok    = (mtag == tag_in) && !iv_in[95] && (cmd_idx < 32'(NUM_REGS));

  always_comb begin
    h_we    = (state == R_CHECK) && cmd_ok && cmd_write;
    h_idx   = IW'(cmd_idx);
    h_wdata = pt[63:32];
  end

  // ------------------------------------------------ AXI4-Lite
  logic cmd_wr;
  logic [5:0] waddr_w, raddr_w;
  assign waddr_w  = s_awaddr[7:2];
  assign raddr_w  = s_araddr[7:2];
  assign s_awready = s_awvalid && s_wvalid && !s_bvalid && (state == R_IDLE);
  assign s_wready  = s_awready;
  assign s_bresp   = RESP_OKAY;
  assign s_arready = !s_rvalid;
  assign s_rresp   = RESP_OKAY;
  assign cmd_wr    = s_awready && (waddr_w == 6'd12);

  assign mac_start = (state == R_IDLE && cmd_wr && aes_key_ready) || (state == R_RENC && a_have);

  function automatic logic [31:0] word_of(input logic [127:0] v, input logic [1:0] i);
    return v[127 - 32*i -: 32];
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= R_IDLE;
      ct_in <= '0; tag_in <= '0; iv_in <= '0;
      ct_out <= '0; tag_out <= '0; iv_out <= '0;
      resp_n <= '0;
      auth_err <= 1'b0; resp_valid <= 1'b0;
      ks <= '0; a_issued <= 1'b0; a_have <= 1'b0; m_have <= 1'b0; mw <= '0; mtag <= '0;
      pt_resp <= '0;
      s_bvalid <= 1'b0; s_rvalid <= 1'b0; s_rdata <= '0;
      ev_reg_write <= 1'b0; ev_reg_read <= 1'b0; ev_reg_auth_fail <= 1'b0;
    end else begin
      ev_reg_write <= 1'b0; ev_reg_read <= 1'b0; ev_reg_auth_fail <= 1'b0;
      // ---- AXI-L writes to the staging registers
      if (s_awready) begin
        s_bvalid <= 1'b1;
        unique case (waddr_w)
          6'd0, 6'd1, 6'd2, 6'd3:  ct_in[127 - 32*waddr_w[1:0] -: 32]  <= s_wdata;
          6'd4, 6'd5, 6'd6, 6'd7:  tag_in[127 - 32*waddr_w[1:0] -: 32] <= s_wdata;
          6'd8, 6'd9, 6'd10:       iv_in[95 - 32*(waddr_w - 6'd8) -: 32] <= s_wdata;
          default: ;
        endcase
      end
      if (s_bvalid && s_bready) s_bvalid <= 1'b0;
      // ---- AXI-L reads of the response registers and status
      if (s_arvalid && s_arready) begin
        s_rvalid <= 1'b1;
        unique case (raddr_w)
          6'd0, 6'd1, 6'd2, 6'd3:  s_rdata <= word_of(ct_out, raddr_w[1:0]);
          6'd4, 6'd5, 6'd6, 6'd7:  s_rdata <= word_of(tag_out, raddr_w[1:0]);
          6'd8, 6'd9, 6'd10:       s_rdata <= iv_out[95 - 32*(raddr_w - 6'd8) -: 32];
          6'd13:                   s_rdata <= {29'h0, resp_valid, auth_err, state != R_IDLE};
          default:                 s_rdata <= '0;
        endcase
      end
      if (s_rvalid && s_rready) s_rvalid <= 1'b0;

      // ---- command engine
      unique case (state)
        R_IDLE: if (cmd_wr && aes_key_ready) begin
          state <= R_VER;
          a_issued <= 1'b0; a_have <= 1'b0; m_have <= 1'b0; mw <= '0;
          resp_valid <= 1'b0;
        end
        R_VER, R_RENC, R_RMAC: begin
          if (aes_in_valid && aes_in_ready) a_issued <= 1'b1;
          if (aes_out_valid) begin ks <= aes_out; a_have <= 1'b1; end
          if (mac_in_valid && mac_in_ready) mw <= mw + 2'd1;
          if (mac_out_valid) begin mtag <= mac_out[255:128]; m_have <= 1'b1; end
          if (state == R_VER && a_have && m_have) state <= R_CHECK;
          if (state == R_RENC && a_have) begin
            ct_out <= pt_resp ^ ks;
            mw     <= '0;
            m_have <= 1'b0;
            state  <= R_RMAC;
          end
          if (state == R_RMAC && m_have) state <= R_FIN;
        end
        R_CHECK: begin
          if (!cmd_ok) begin
            auth_err <= 1'b1;
            ev_reg_auth_fail <= 1'b1;
            state <= R_IDLE;
          end else begin
            auth_err <= 1'b0;
            if (cmd_write) begin
              ev_reg_write <= 1'b1;
              state <= R_IDLE;
            end else begin
              pt_resp  <= {32'h0, cmd_idx, h_rdata, 32'h0};
              iv_out   <= {1'b1, 31'h0, resp_n};
              resp_n   <= resp_n + 64'd1;
              a_issued <= 1'b0;
              a_have   <= 1'b0;
              state    <= R_RENC;
            end
          end
        end
        R_FIN: begin
          tag_out    <= mtag;
          resp_valid <= 1'b1;
          ev_reg_read <= 1'b1;
          state      <= R_IDLE;
        end
        default: state <= R_IDLE;
      endcase
    end
  end

  // AXI4-Lite: a response is held until accepted.
  a_b_hold: assert property (@(posedge clk) disable iff (!rst_n) s_bvalid && !s_bready |=> s_bvalid);
  a_r_hold: assert property (@(posedge clk) disable iff (!rst_n)
    s_rvalid && !s_rready |=> s_rvalid && $stable(s_rdata));

endmodule
