// burst_decoder: routes accelerator AXI4 bursts to the engine sets.
//
// The accelerator sees one AXI4 slave port, as it would on the bare Shell.
// Each burst is looked up in the partition map and handed to the engine set
// that owns its address range; its data and response beats are then steered
// between the accelerator and that engine set. This follows the paper's
// burst decoder and partition map. This design's choices: one read burst and
// one write burst in flight at a time (reads and writes are independent, so
// a read and a write may be served by two engine sets at once); a burst that
// falls outside every region, or crosses a region boundary, is answered by
// the decoder itself with DECERR (read data zero, write data dropped) and
// reaches no engine set.
//
// Timing: address channels pass through combinationally (no added cycle);
// data and response channels are steered by registered selects.
module burst_decoder
  import shield_pkg::*;
#(
  parameter int NUM_SETS = 2,
  parameter logic [NUM_SETS-1:0][AXI_ADDR_W-1:0] REGION_BASE  = {64'h0000_0000_0010_0000, 64'h0},
  parameter logic [NUM_SETS-1:0][AXI_ADDR_W-1:0] REGION_BYTES = {64'h0000_0000_0010_0000, 64'h0000_0000_0010_0000},
  localparam int SW = (NUM_SETS > 1) ? $clog2(NUM_SETS) : 1
) (
  input  logic clk,
  input  logic rst_n,
  // from the accelerator
  input  logic    s_ar_valid, output logic s_ar_ready, input  axi_ax_t s_ar,
  output logic    s_r_valid,  input  logic s_r_ready,  output axi_r_t  s_r,
  input  logic    s_aw_valid, output logic s_aw_ready, input  axi_ax_t s_aw,
  input  logic    s_w_valid,  output logic s_w_ready,  input  axi_w_t  s_w,
  output logic    s_b_valid,  input  logic s_b_ready,  output axi_b_t  s_b,
  // to the engine sets
  output logic [NUM_SETS-1:0] m_ar_valid, input  logic [NUM_SETS-1:0] m_ar_ready, output axi_ax_t m_ar,
  input  logic [NUM_SETS-1:0] m_r_valid,  output logic [NUM_SETS-1:0] m_r_ready,  input  axi_r_t  m_r [NUM_SETS],
  output logic [NUM_SETS-1:0] m_aw_valid, input  logic [NUM_SETS-1:0] m_aw_ready, output axi_ax_t m_aw,
  output logic [NUM_SETS-1:0] m_w_valid,  input  logic [NUM_SETS-1:0] m_w_ready,  output axi_w_t  m_w,
  input  logic [NUM_SETS-1:0] m_b_valid,  output logic [NUM_SETS-1:0] m_b_ready,  input  axi_b_t  m_b [NUM_SETS]
);

  logic          ar_hit, aw_hit;
  logic [SW-1:0] ar_set, aw_set;

  partition_map #(.NUM_SETS(NUM_SETS), .REGION_BASE(REGION_BASE), .REGION_BYTES(REGION_BYTES)) u_map_r (
    .addr(s_ar.addr), .bytes(64'(s_ar.len) * 64'(BEAT_BYTES) + 64'(BEAT_BYTES)),
    .hit(ar_hit), .set_idx(ar_set));
  partition_map #(.NUM_SETS(NUM_SETS), .REGION_BASE(REGION_BASE), .REGION_BYTES(REGION_BYTES)) u_map_w (
    .addr(s_aw.addr), .bytes(64'(s_aw.len) * 64'(BEAT_BYTES) + 64'(BEAT_BYTES)),
    .hit(aw_hit), .set_idx(aw_set));

  // ------------------------------------------------------------ read side
  typedef enum logic [1:0] {RD_IDLE, RD_SET, RD_ERR} rd_state_t;
  rd_state_t     rd_state;
  logic [SW-1:0] rd_sel;
  logic [7:0]    rd_left;
  logic [AXI_ID_W-1:0] rd_id;

  assign m_ar = s_ar;
  always_comb begin
    m_ar_valid = '0;
    s_ar_ready = 1'b0;
    if (rd_state == RD_IDLE) begin
      if (ar_hit) begin
        m_ar_valid[ar_set] = s_ar_valid;
        s_ar_ready         = m_ar_ready[ar_set];
      end else begin
        s_ar_ready = 1'b1;
      end
    end
    m_r_ready = '0;
    s_r_valid = 1'b0;
    s_r       = '{id: rd_id, data: '0, resp: RESP_DECERR, last: (rd_left == 8'd0)};
    if (rd_state == RD_SET) begin
      s_r_valid         = m_r_valid[rd_sel];
      s_r               = m_r[rd_sel];
      m_r_ready[rd_sel] = s_r_ready;
    end else if (rd_state == RD_ERR) begin
      s_r_valid = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_state <= RD_IDLE;
      rd_sel   <= '0;
      rd_left  <= '0;
      rd_id    <= '0;
    end else begin
      unique case (rd_state)
        RD_IDLE: if (s_ar_valid && s_ar_ready) begin
          rd_sel   <= ar_set;
          rd_left  <= s_ar.len;
          rd_id    <= s_ar.id;
          rd_state <= ar_hit ? RD_SET : RD_ERR;
        end
        RD_SET: if (s_r_valid && s_r_ready && s_r.last) rd_state <= RD_IDLE;
        RD_ERR: if (s_r_ready) begin
          rd_left <= rd_left - 8'd1;
          if (rd_left == 8'd0) rd_state <= RD_IDLE;
        end
        default: rd_state <= RD_IDLE;
      endcase
    end
  end

  // ------------------------------------------------------------ write side
  typedef enum logic [2:0] {WR_IDLE, WR_SET, WR_ERR, WR_ERR_B} wr_state_t;
  wr_state_t     wr_state;
  logic [SW-1:0] wr_sel;
  logic [AXI_ID_W-1:0] wr_id;

  assign m_aw = s_aw;
  assign m_w  = s_w;
  always_comb begin
    m_aw_valid = '0;
    s_aw_ready = 1'b0;
    if (wr_state == WR_IDLE) begin
      if (aw_hit) begin
        m_aw_valid[aw_set] = s_aw_valid;
        s_aw_ready         = m_aw_ready[aw_set];
      end else begin
        s_aw_ready = 1'b1;
      end
    end
    m_w_valid = '0;
    s_w_ready = 1'b0;
    m_b_ready = '0;
    s_b_valid = 1'b0;
    s_b       = '{id: wr_id, resp: RESP_DECERR};
    unique case (wr_state)
      WR_SET: begin
        m_w_valid[wr_sel] = s_w_valid;
        s_w_ready         = m_w_ready[wr_sel];
        s_b_valid         = m_b_valid[wr_sel];
        s_b               = m_b[wr_sel];
        m_b_ready[wr_sel] = s_b_ready;
      end
      WR_ERR:   s_w_ready = 1'b1;
      WR_ERR_B: s_b_valid = 1'b1;
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_state <= WR_IDLE;
      wr_sel   <= '0;
      wr_id    <= '0;
    end else begin
      unique case (wr_state)
        WR_IDLE: if (s_aw_valid && s_aw_ready) begin
          wr_sel   <= aw_set;
          wr_id    <= s_aw.id;
          wr_state <= aw_hit ? WR_SET : WR_ERR;
        end
        WR_SET:   if (s_b_valid && s_b_ready) wr_state <= WR_IDLE;
        WR_ERR:   if (s_w_valid && s_w.last) wr_state <= WR_ERR_B;
        WR_ERR_B: if (s_b_ready) wr_state <= WR_IDLE;
        default:  wr_state <= WR_IDLE;
      endcase
    end
  end

endmodule
