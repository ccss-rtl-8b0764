// sram_5r1w: one data-memory bank with five read ports and one write port.
//
// Each core uses four of these banks. A bank stores 32-bit words; reads are
// synchronous (address at a clock edge, data valid for the following cycle)
// and the write port has a per-bit write enable so that a few LUT results or
// one register vector can be merged into a word. A read and a write to the
// same word at the same edge return the old contents (read-before-write).
//
// The five-read/one-write organisation and the 32-bit word follow the
// published architecture, which uses a custom multi-port SRAM macro. Here the
// bank is a plain array with the same ports; the depth (256 words), the bit
// mask and the collision rule are this design's choices.
module sram_5r1w #(
  parameter int N_RD   = 5,
  parameter int WORD_W = 32,
  parameter int DEPTH  = 256,
  localparam int AW    = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic [N_RD-1:0][AW-1:0]  rd_addr,
  output logic [N_RD-1:0][WORD_W-1:0] rd_data,
  input  logic                     we,
  input  logic [AW-1:0]            wr_addr,
  input  logic [WORD_W-1:0]        wr_data,
  input  logic [WORD_W-1:0]        wr_mask
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[wr_addr] <= (mem[wr_addr] & ~wr_mask) | (wr_data & wr_mask);
    for (int p = 0; p < N_RD; p++) rd_data[p] <= mem[rd_addr[p]];
  end
endmodule
