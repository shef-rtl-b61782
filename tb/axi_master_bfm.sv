// axi_master_bfm: AXI4 master driver for testbenches.
//
// Drives INCR bursts of full 64-byte beats through tasks: write_burst sends
// up to 256 beats from `wbuf` and returns the B response; read_burst fills
// `rbuf` and `rresp` and returns the worst response seen. `cycles` returns
// the number of clock cycles the burst took, from address valid to the
// last handshake.
module axi_master_bfm
  import shield_pkg::*;
(
  input  logic    clk,
  output logic    ar_valid, input  logic ar_ready, output axi_ax_t ar,
  input  logic    r_valid,  output logic r_ready,  input  axi_r_t  r,
  output logic    aw_valid, input  logic aw_ready, output axi_ax_t aw,
  output logic    w_valid,  input  logic w_ready,  output axi_w_t  w,
  input  logic    b_valid,  output logic b_ready,  input  axi_b_t  b
);
  logic [AXI_DATA_W-1:0] wbuf [256];
  logic [AXI_DATA_W-1:0] rbuf [256];
  logic [1:0]            rresp [256];

  initial begin
    ar_valid = 0; r_ready = 0; aw_valid = 0; w_valid = 0; b_ready = 0;
    ar = '0; aw = '0; w = '0;
  end

  // Signals are driven and ready/valid sampled 1 time unit after the falling
  // edge, so a handshake seen there completes at the next rising edge.
  task automatic write_burst(input logic [63:0] addr, input int beats,
                             output logic [1:0] resp, output int cycles);
    cycles = 0;
    @(negedge clk);
    aw = '{id: 16'h5, addr: addr, len: 8'(beats - 1), size: 3'd6, burst: 2'b01};
    aw_valid = 1;
    #1;
    while (!aw_ready) begin @(negedge clk); cycles++; #1; end
    @(negedge clk); cycles++;
    aw_valid = 0;
    for (int i = 0; i < beats; i++) begin
      w = '{data: wbuf[i], strb: '1, last: (i == beats - 1)};
      w_valid = 1;
      #1;
      while (!w_ready) begin @(negedge clk); cycles++; #1; end
      @(negedge clk); cycles++;
    end
    w_valid = 0;
    b_ready = 1;
    #1;
    while (!b_valid) begin @(negedge clk); cycles++; #1; end
    resp = b.resp;
    @(negedge clk); cycles++;
    b_ready = 0;
  endtask

  task automatic read_burst(input logic [63:0] addr, input int beats,
                            output logic [1:0] resp, output int cycles);
    int n = 0;
    resp = RESP_OKAY;
    cycles = 0;
    @(negedge clk);
    ar = '{id: 16'h9, addr: addr, len: 8'(beats - 1), size: 3'd6, burst: 2'b01};
    ar_valid = 1;
    #1;
    while (!ar_ready) begin @(negedge clk); cycles++; #1; end
    @(negedge clk); cycles++;
    ar_valid = 0;
    r_ready = 1;
    while (n < beats) begin
      #1;
      if (r_valid) begin
        rbuf[n] = r.data;
        rresp[n] = r.resp;
        if (r.resp > resp) resp = r.resp;
        n++;
      end
      @(negedge clk); cycles++;
    end
    r_ready = 0;
  endtask
endmodule
