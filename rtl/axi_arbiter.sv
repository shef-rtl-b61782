// axi_arbiter: shares the Shell's AXI4 memory port among the engine sets.
//
// Every engine set is an AXI4 master towards device memory; the Shell offers
// one port. The paper shows an arbiter in this position and says no more.
// This design grants the read channel and the write channel independently,
// round-robin among requesting engine sets, and holds a read grant until the
// burst's last R beat and a write grant until its B response, so beats of
// different bursts never interleave and no ID remapping is needed.
//
// Timing: a grant is decided in the cycle after the previous burst ends
// (one idle cycle per burst); address, data and response beats then pass
// through combinationally.
module axi_arbiter
  import shield_pkg::*;
#(
  parameter int NUM_M = 2,
  localparam int SW = (NUM_M > 1) ? $clog2(NUM_M) : 1
) (
  input  logic clk,
  input  logic rst_n,
  // from the engine sets
  input  logic [NUM_M-1:0] s_ar_valid, output logic [NUM_M-1:0] s_ar_ready, input  axi_ax_t s_ar [NUM_M],
  output logic [NUM_M-1:0] s_r_valid,  input  logic [NUM_M-1:0] s_r_ready,  output axi_r_t  s_r,
  input  logic [NUM_M-1:0] s_aw_valid, output logic [NUM_M-1:0] s_aw_ready, input  axi_ax_t s_aw [NUM_M],
  input  logic [NUM_M-1:0] s_w_valid,  output logic [NUM_M-1:0] s_w_ready,  input  axi_w_t  s_w [NUM_M],
  output logic [NUM_M-1:0] s_b_valid,  input  logic [NUM_M-1:0] s_b_ready,  output axi_b_t  s_b,
  // to the Shell
  output logic    m_ar_valid, input  logic m_ar_ready, output axi_ax_t m_ar,
  input  logic    m_r_valid,  output logic m_r_ready,  input  axi_r_t  m_r,
  output logic    m_aw_valid, input  logic m_aw_ready, output axi_ax_t m_aw,
  output logic    m_w_valid,  input  logic m_w_ready,  output axi_w_t  m_w,
  input  logic    m_b_valid,  output logic m_b_ready,  input  axi_b_t  m_b,
  output logic    rd_contended,   // pulses when a read grant is made while others wait
  output logic    wr_contended
);

  function automatic logic [SW-1:0] rr_pick(input logic [NUM_M-1:0] req, input logic [SW-1:0] last);
    logic [SW-1:0] pick = last;
    for (int k = NUM_M; k >= 1; k--) begin
      int idx = (int'(last) + k) % NUM_M;
      if (req[idx]) pick = SW'(idx);
    end
    return pick;
  endfunction

  // ------------------------------------------------------------ read
  logic          rd_busy, rd_addr_done;
  logic [SW-1:0] rd_g;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_busy <= 1'b0; rd_addr_done <= 1'b0; rd_g <= SW'(NUM_M - 1); rd_contended <= 1'b0;
    end else begin
      rd_contended <= 1'b0;
      if (!rd_busy) begin
        if (|s_ar_valid) begin
          rd_g    <= rr_pick(s_ar_valid, rd_g);
          rd_busy <= 1'b1;
          rd_addr_done <= 1'b0;
          rd_contended <= !$onehot(s_ar_valid);
        end
      end else begin
        if (m_ar_valid && m_ar_ready) rd_addr_done <= 1'b1;
        if (m_r_valid && m_r_ready && m_r.last) rd_busy <= 1'b0;
      end
    end
  end
  always_comb begin
    s_ar_ready = '0;
    s_r_valid  = '0;
    m_ar_valid = rd_busy && !rd_addr_done && s_ar_valid[rd_g];
    m_ar       = s_ar[rd_g];
    if (rd_busy && !rd_addr_done) s_ar_ready[rd_g] = m_ar_ready;
    if (rd_busy) s_r_valid[rd_g] = m_r_valid;
    m_r_ready  = rd_busy && s_r_ready[rd_g];
    s_r        = m_r;
  end

  // ------------------------------------------------------------ write
  logic          wr_busy, wr_addr_done;
  logic [SW-1:0] wr_g;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_busy <= 1'b0; wr_addr_done <= 1'b0; wr_g <= SW'(NUM_M - 1); wr_contended <= 1'b0;
    end else begin
      wr_contended <= 1'b0;
      if (!wr_busy) begin
        if (|s_aw_valid) begin
          wr_g    <= rr_pick(s_aw_valid, wr_g);
          wr_busy <= 1'b1;
          wr_addr_done <= 1'b0;
          wr_contended <= !$onehot(s_aw_valid);
        end
      end else begin
        if (m_aw_valid && m_aw_ready) wr_addr_done <= 1'b1;
        if (m_b_valid && m_b_ready) wr_busy <= 1'b0;
      end
    end
  end
  always_comb begin
    s_aw_ready = '0;
    s_w_ready  = '0;
    s_b_valid  = '0;
    m_aw_valid = wr_busy && !wr_addr_done && s_aw_valid[wr_g];
    m_aw       = s_aw[wr_g];
    if (wr_busy && !wr_addr_done) s_aw_ready[wr_g] = m_aw_ready;
    m_w_valid  = wr_busy && s_w_valid[wr_g];
    m_w        = s_w[wr_g];
    if (wr_busy) s_w_ready[wr_g] = m_w_ready;
    if (wr_busy) s_b_valid[wr_g] = m_b_valid;
    m_b_ready  = wr_busy && s_b_ready[wr_g];
    s_b        = m_b;
  end

endmodule
