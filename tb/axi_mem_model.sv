// axi_mem_model: behavioural model of FPGA device memory behind the Shell.
//
// An AXI4 slave over a sparse array of 64-byte beats (unwritten beats read as
// zero). One read burst and one write burst are served at a time; INCR bursts
// only. When STALL is set, ready and valid signals are withheld on a
// pseudo-random pattern to exercise back-pressure. Testbenches reach the
// contents directly through `mem` to inspect or tamper with ciphertext.
module axi_mem_model
  import shield_pkg::*;
#(
  parameter bit STALL = 1'b1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    ar_valid, output logic ar_ready, input  axi_ax_t ar,
  output logic    r_valid,  input  logic r_ready,  output axi_r_t  r,
  input  logic    aw_valid, output logic aw_ready, input  axi_ax_t aw,
  input  logic    w_valid,  output logic w_ready,  input  axi_w_t  w,
  output logic    b_valid,  input  logic b_ready,  output axi_b_t  b
);
  logic [AXI_DATA_W-1:0] mem [logic [57:0]];
  int reads = 0, writes = 0;

  logic        rd_act, wr_act, b_pend;
  axi_ax_t     rq, wq;
  logic [7:0]  rcnt;
  logic [31:0] lfsr;
  logic        go;
  assign go = !STALL || lfsr[0] || lfsr[3];

  function automatic logic [AXI_DATA_W-1:0] rd(input logic [57:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  assign ar_ready = !rd_act && go;
  assign r_valid  = rd_act && go;
  assign r.id     = rq.id;
  assign r.data   = rd(58'((rq.addr >> 6) + 64'(rcnt)));
  assign r.resp   = RESP_OKAY;
  assign r.last   = (rcnt == rq.len);
  assign aw_ready = !wr_act && !b_pend && go;
  assign w_ready  = wr_act && go;
  assign b_valid  = b_pend;
  assign b.id     = wq.id;
  assign b.resp   = RESP_OKAY;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_act <= 0; wr_act <= 0; b_pend <= 0; rcnt <= 0; lfsr <= 32'h1234_5678;
      rq <= '0; wq <= '0;
    end else begin
      lfsr <= {lfsr[30:0], lfsr[31] ^ lfsr[21] ^ lfsr[1] ^ lfsr[0]};
      if (ar_valid && ar_ready) begin rq <= ar; rd_act <= 1; rcnt <= 0; reads++; end
      if (r_valid && r_ready) begin
        rcnt <= rcnt + 1;
        if (r.last) rd_act <= 0;
      end
      if (aw_valid && aw_ready) begin wq <= aw; wr_act <= 1; writes++; end
      if (w_valid && w_ready) begin
        logic [57:0] a;
        logic [AXI_DATA_W-1:0] d;
        a = 58'(wq.addr >> 6);
        d = rd(a);
        for (int i = 0; i < AXI_STRB_W; i++) if (w.strb[i]) d[8*i +: 8] = w.data[8*i +: 8];
        mem[a] = d;
        wq.addr <= wq.addr + 64;
        if (w.last) begin wr_act <= 0; b_pend <= 1; end
      end
      if (b_valid && b_ready) b_pend <= 0;
    end
  end
endmodule
