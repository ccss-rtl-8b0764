// lut_unit: one time-multiplexed 4-input LUT with its instruction memory.
//
// The unit stores INSTR_DEPTH instructions, one per time slot of an RTL cycle.
// An instruction holds a 16-bit truth table and four operands (word address
// and bit index in the core's data memory). Timing, for a slot fetched at
// clock edge E0:
//   cycle after E0 : rd_req carries the four operands to the memory access
//                    circuit, which reads the words at edge E1;
//   cycle after E1 : rd_bit holds the four selected bits and lut_out is
//                    truth[{rd_bit[3],rd_bit[2],rd_bit[1],rd_bit[0]}].
// A new slot can be fetched every cycle, so memory access of one slot overlaps
// the evaluation of the previous one.
//
// The 512-slot depth and the 4-input LUT follow the published design; the
// instruction format and the configuration write port are this design's own.
module lut_unit
  import ccss_pkg::*;
#(
  parameter int DEPTH = INSTR_DEPTH,
  localparam int IAW  = $clog2(DEPTH)
) (
  input  logic                   clk,
  input  logic                   cfg_we,
  input  logic [IAW-1:0]         cfg_addr,
  input  lut_instr_t             cfg_instr,
  input  logic                   fetch_en,
  input  logic [IAW-1:0]         fetch_slot,
  output operand_t [LUT_K-1:0]   rd_req,
  input  logic [LUT_K-1:0]       rd_bit,
  output logic                   lut_out
);
  lut_instr_t imem [DEPTH];
  lut_instr_t instr_q;
  logic [15:0] truth_q;

  always_ff @(posedge clk) begin
    if (cfg_we) imem[cfg_addr] <= cfg_instr;
    if (fetch_en) instr_q <= imem[fetch_slot];
    truth_q <= instr_q.truth;
  end

  assign rd_req  = instr_q.op;
  assign lut_out = truth_q[rd_bit];
endmodule
