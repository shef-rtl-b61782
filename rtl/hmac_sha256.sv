// hmac_sha256: HMAC-SHA256 authentication engine (the Shield's MAC engine).
//
// Computes HMAC-SHA256(K, M) = H((K^opad) || H((K^ipad) || M)) over a message
// of msg_len bytes that is streamed in as 16-byte words, most significant
// byte first; the last word may be partial (its unused bytes are ignored).
// The key is up to 32 bytes, left-aligned in `key` and zero-padded, which is
// exactly HMAC's own padding, so a 16-byte AES-128 key can be given as
// {key, 128'h0}. The paper names a SHA-256 HMAC engine with a valid/ready
// interface; the word width, the framing and the one-compression-at-a-time
// schedule are this design's choices. Users of the tag keep its first
// 16 bytes (tag[255:128]), the 16-byte MAC tag the paper stores per chunk.
//
// How it works: a word buffer collects four words into a 512-bit block and
// hands it to one sha256_core. SHA padding (0x80, zeros, bit length) is
// inserted on the fly, counting the 64-byte ipad block in the length.
//
// Interface: pulse start (with msg_len) while idle, then feed
// ceil(msg_len/16) words on in_valid/in_ready; out_valid rises with the
// 256-bit tag and holds until out_ready.
// Timing: 3 + ceil((msg_len + 9)/64) compressions (ipad block, message
// blocks, opad block, outer block) of 67 cycles each, plus one cycle per
// 16-byte word including padding words: 842 cycles from start to out_valid
// for a 528-byte message (16-byte header + 512-byte chunk).
module hmac_sha256 (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [255:0] key,
  input  logic         start,
  input  logic [31:0]  msg_len,
  output logic         busy,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [127:0] in_data,
  output logic         out_valid,
  input  logic         out_ready,
  output logic [255:0] tag
);

  localparam logic [255:0] SHA_IV = {32'h6a09e667, 32'hbb67ae85, 32'h3c6ef372, 32'ha54ff53a,
                                     32'h510e527f, 32'h9b05688c, 32'h1f83d9ab, 32'h5be0cd19};

  typedef enum logic [3:0] {
    H_IDLE, H_IPAD, H_IPAD_W, H_MSG, H_BLK, H_BLK_W, H_OPAD, H_OPAD_W, H_OUTER, H_OUTER_W, H_DONE
  } hstate_t;
  hstate_t state;

  logic [31:0]  len;
  logic [31:0]  widx;         // index of the next 16-byte word (data or padding)
  logic [1:0]   wpos;         // slot within the 512-bit block
  logic [511:0] blk;
  logic         final_blk;
  logic [255:0] hstate;       // running chaining value
  logic [255:0] inner;

  logic         c_start, c_busy, c_done;
  logic [255:0] c_hin, c_hout;
  logic [511:0] c_blk;

  sha256_core u_sha (
    .clk, .rst_n, .start(c_start), .h_in(c_hin), .block(c_blk),
    .busy(c_busy), .done(c_done), .h_out(c_hout)
  );

  logic [511:0] kblk;
  assign kblk = {key, 256'h0};

  logic [31:0] nwords;
  assign nwords = (len + 32'd15) >> 4;

  // Word widx with bytes past the message replaced by SHA padding.
  logic [127:0] word_pad;
  logic         word_final;   // this word closes the last block (length goes in)
  logic [63:0]  bitlen;
  always_comb begin
    logic [31:0] abs;
    bitlen = 64'(len + 32'd64) << 3;
    word_pad = (widx < nwords) ? in_data : 128'h0;
    for (int bt = 0; bt < 16; bt++) begin
      abs = {widx[27:0], 4'h0} + 32'(bt);
      if (abs == len)     word_pad[127-8*bt -: 8] = 8'h80;
      else if (abs > len) word_pad[127-8*bt -: 8] = 8'h00;
    end
    word_final = (wpos == 2'd3) && (({widx[27:0], 4'h0} + 32'd8) > len);
    if (word_final) word_pad[63:0] = bitlen;
  end

  logic word_take;
  assign in_ready  = (state == H_MSG) && (widx < nwords);
  assign word_take = (state == H_MSG) && ((widx < nwords) ? in_valid : 1'b1);
  assign out_valid = (state == H_DONE);
  assign busy      = (state != H_IDLE);

  always_comb begin
    c_start = 1'b0;
    c_hin   = hstate;
    c_blk   = blk;
    unique case (state)
      H_IPAD:  begin c_start = 1'b1; c_hin = SHA_IV; c_blk = kblk ^ {64{8'h36}}; end
      H_BLK:   begin c_start = 1'b1; end
      H_OPAD:  begin c_start = 1'b1; c_hin = SHA_IV; c_blk = kblk ^ {64{8'h5c}}; end
      H_OUTER: begin c_start = 1'b1; c_blk = {inner, 8'h80, 184'h0, 64'd768}; end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= H_IDLE;
      len   <= '0;
      widx  <= '0;
      wpos  <= '0;
      blk   <= '0;
      final_blk <= 1'b0;
      hstate <= '0;
      inner <= '0;
      tag   <= '0;
    end else begin
      unique case (state)
        H_IDLE: if (start) begin
          len   <= msg_len;
          widx  <= '0;
          wpos  <= '0;
          final_blk <= 1'b0;
          state <= H_IPAD;
        end
        H_IPAD:   state <= H_IPAD_W;
        H_IPAD_W: if (c_done) begin hstate <= c_hout; state <= H_MSG; end
        H_MSG: if (word_take) begin
          blk[511-128*wpos -: 128] <= word_pad;
          widx <= widx + 32'd1;
          wpos <= wpos + 2'd1;
          if (wpos == 2'd3) begin
            final_blk <= word_final;
            state     <= H_BLK;
          end
        end
        H_BLK:   state <= H_BLK_W;
        H_BLK_W: if (c_done) begin
          hstate <= c_hout;
          if (final_blk) begin
            inner <= c_hout;
            state <= H_OPAD;
          end else begin
            state <= H_MSG;
          end
        end
        H_OPAD:    state <= H_OPAD_W;
        H_OPAD_W:  if (c_done) begin hstate <= c_hout; state <= H_OUTER; end
        H_OUTER:   state <= H_OUTER_W;
        H_OUTER_W: if (c_done) begin tag <= c_hout; state <= H_DONE; end
        H_DONE:    if (out_ready) state <= H_IDLE;
        default:   state <= H_IDLE;
      endcase
    end
  end

endmodule
