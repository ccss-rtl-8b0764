// mem_access: the memory access circuit of one core.
//
// Four 5R1W banks give 20 read ports. Port p = k*N_LUT + j is served by bank k,
// read port j: during computation it feeds input k of LUT unit j, after
// computation the sync engine uses all 20 ports to gather one register vector.
// Every port carries an operand (word address, bit index); the word is read at
// the clock edge and a bit-select multiplexer returns the single addressed bit
// in the next cycle. Writes go to all four banks at once, so the banks hold
// identical copies and any LUT input can read any stored bit.
//
// Four banks, 20 ports, 32-bit words and the bit multiplexer follow the
// published design. Replicating the contents over the banks is this design's
// choice. rd_word0 exposes the full word of port 0 for host read-back.
module mem_access
  import ccss_pkg::*;
#(
  parameter int DEPTH = DATA_DEPTH
) (
  input  logic                   clk,
  input  operand_t [N_RP-1:0]    rd_req,
  output logic [N_RP-1:0]        rd_bit,
  output logic [WORD_W-1:0]      rd_word0,
  input  logic                   we,
  input  logic [AW-1:0]          wr_addr,
  input  logic [WORD_W-1:0]      wr_data,
  input  logic [WORD_W-1:0]      wr_mask
);
  logic [N_BANK-1:0][N_LUT-1:0][AW-1:0]     raddr;
  logic [N_BANK-1:0][N_LUT-1:0][WORD_W-1:0] rdata;
  logic [N_RP-1:0][BIT_W-1:0]               bitsel_q;

  for (genvar k = 0; k < N_BANK; k++) begin : g_bank
    for (genvar j = 0; j < N_LUT; j++) begin : g_port
      assign raddr[k][j] = rd_req[k*N_LUT + j].addr;
    end
    sram_5r1w #(.N_RD(N_LUT), .WORD_W(WORD_W), .DEPTH(DEPTH)) u_bank (
      .clk, .rd_addr(raddr[k]), .rd_data(rdata[k]),
      .we, .wr_addr, .wr_data, .wr_mask);
  end

  always_ff @(posedge clk)
    for (int p = 0; p < N_RP; p++) bitsel_q[p] <= rd_req[p].bitsel;

  always_comb
    for (int p = 0; p < N_RP; p++)
      rd_bit[p] = rdata[p / N_LUT][p % N_LUT][bitsel_q[p]];

  assign rd_word0 = rdata[0][0];
endmodule
