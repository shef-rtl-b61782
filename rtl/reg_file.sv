// reg_file: plaintext register file between the register interface and the
// accelerator.
//
// The Shield's register interface decrypts and authenticates the host's
// register commands and then reads or writes this file; the accelerator sees
// the registers in the clear. The paper describes the register file by its
// role only. Here it is NUM_REGS 32-bit registers, all visible to the
// accelerator at once (reg_q), with one write port for the Shield and one for
// the accelerator (to post results or status). If both write the same
// register in one cycle the accelerator's write wins.
//
// Timing: writes take effect on the next clock edge; host reads are
// combinational.
module reg_file #(
  parameter int NUM_REGS = 32,
  localparam int IW = $clog2(NUM_REGS)
) (
  input  logic        clk,
  input  logic        rst_n,
  // Shield (host) side
  input  logic        h_we,
  input  logic [IW-1:0] h_idx,
  input  logic [31:0] h_wdata,
  output logic [31:0] h_rdata,
  // accelerator side
  input  logic        a_we,
  input  logic [IW-1:0] a_idx,
  input  logic [31:0] a_wdata,
  output logic [NUM_REGS-1:0][31:0] reg_q
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      reg_q <= '0;
    end else begin
      if (h_we) reg_q[h_idx] <= h_wdata;
      if (a_we) reg_q[a_idx] <= a_wdata;
    end
  end
  assign h_rdata = reg_q[h_idx];
endmodule
