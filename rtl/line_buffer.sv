// line_buffer: an engine set's on-chip buffer of decrypted chunks.
//
// The paper describes the buffer as a cache whose line size is the chunk size
// C_mem: it holds authenticated plaintext together with the address range it
// came from, so that hits are served without touching DRAM. This block is the
// storage: LINES lines of BEATS_PER_LINE 512-bit beats, plus per-line valid,
// dirty and chunk-index tags. Where a chunk goes (direct mapped, chunk index
// modulo LINES) and when lines fill and drain is decided by the engine set.
// Two combinational read ports let the MAC engine and the AES engine walk
// the same line at once; one write port takes byte strobes, so the AES engine
// can update one 16-byte word and the accelerator can write partial beats.
//
// The data array is written as a memory so a synthesis tool may map it to
// block RAM or UltraRAM; its contents are not reset (nothing is read from a
// line before it has been filled, because valid bits are reset).
module line_buffer
  import shield_pkg::*;
#(
  parameter int LINES          = 32,
  parameter int BEATS_PER_LINE = 8,
  parameter int TAG_W          = 16,
  localparam int LW = (LINES > 1) ? $clog2(LINES) : 1,
  localparam int AW = $clog2(LINES * BEATS_PER_LINE)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // data
  input  logic [AW-1:0]         ra_addr,
  output logic [AXI_DATA_W-1:0] ra_data,
  input  logic [AW-1:0]         rb_addr,
  output logic [AXI_DATA_W-1:0] rb_data,
  input  logic                  we,
  input  logic [AW-1:0]         waddr,
  input  logic [AXI_STRB_W-1:0] wstrb,
  input  logic [AXI_DATA_W-1:0] wdata,
  // tags
  input  logic [LW-1:0]         m_line,
  output logic                  m_valid,
  output logic                  m_dirty,
  output logic [TAG_W-1:0]      m_tag,
  input  logic                  m_we,
  input  logic [LW-1:0]         m_wline,
  input  logic                  m_wvalid,
  input  logic                  m_wdirty,
  input  logic [TAG_W-1:0]      m_wtag,
  input  logic                  m_clear_all
);
  logic [AXI_DATA_W-1:0] mem [LINES * BEATS_PER_LINE];
  logic [LINES-1:0]      valid, dirty;
  logic [TAG_W-1:0]      tags [LINES];

  always_ff @(posedge clk) begin
    if (we)
      for (int b = 0; b < AXI_STRB_W; b++)
        if (wstrb[b]) mem[waddr][8*b +: 8] <= wdata[8*b +: 8];
  end

  assign ra_data = mem[ra_addr];
  assign rb_data = mem[rb_addr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      dirty <= '0;
      for (int i = 0; i < LINES; i++) tags[i] <= '0;
    end else if (m_clear_all) begin
      valid <= '0;
      dirty <= '0;
    end else if (m_we) begin
      valid[m_wline] <= m_wvalid;
      dirty[m_wline] <= m_wdirty;
      tags[m_wline]  <= m_wtag;
    end
  end

  assign m_valid = valid[m_line];
  assign m_dirty = dirty[m_line];
  assign m_tag   = tags[m_line];
endmodule
