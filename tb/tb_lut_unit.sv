// tb_lut_unit: self-checking test of one time-multiplexed LUT unit.
//
// Loads random instructions, fetches slots one per clock and checks that the
// four operands appear on rd_req one clock after the fetch and that, with
// random bits returned one clock later, lut_out equals the truth-table entry.
// This checks the fetch -> read -> evaluate pipeline at full rate.
module tb_lut_unit;
  import ccss_pkg::*;
  localparam int D = INSTR_DEPTH;
  logic clk = 0;
  logic cfg_we; logic [8:0] cfg_addr; lut_instr_t cfg_instr;
  logic fetch_en; logic [8:0] fetch_slot;
  operand_t [LUT_K-1:0] rd_req;
  logic [LUT_K-1:0] rd_bit;
  logic lut_out;
  int checks = 0, failures = 0;
  lut_instr_t prog [D];
  logic [LUT_K-1:0] bits_hist [3];

  lut_unit dut (.*);
  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    cfg_we = 0; cfg_addr = 0; cfg_instr = '0; fetch_en = 0; fetch_slot = 0; rd_bit = '0;
    for (int s = 0; s < D; s++) begin
      @(negedge clk);
      prog[s] = lut_instr_t'({$urandom, $urandom, $urandom});
      cfg_we = 1; cfg_addr = 9'(s); cfg_instr = prog[s];
    end
    @(negedge clk); cfg_we = 0;
    // stream: slot s fetched at edge s, operands visible after it,
    // bits driven in the following cycle, lut_out checked in that cycle
    for (int c = 0; c < D + 2; c++) begin
      @(negedge clk);
      // stage 2: bits for slot c-2 are driven now
      rd_bit = LUT_K'($urandom);
      if (c >= 2) begin
        #1;
        checks++;
        if (lut_out !== prog[c-2].truth[rd_bit]) begin
          failures++;
          if (failures < 5) $display("slot %0d lut_out %b exp %b", c-2, lut_out, prog[c-2].truth[rd_bit]);
        end
      end
      // stage 1: operands of slot c-1
      if (c >= 1 && c - 1 < D) begin
        checks++;
        if (rd_req !== prog[c-1].op) failures++;
      end
      fetch_en = (c < D); fetch_slot = 9'(c);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
