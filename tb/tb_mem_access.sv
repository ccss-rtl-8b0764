// tb_mem_access: self-checking test of the core memory access circuit.
//
// Writes random words (all four banks at once), then drives random
// (address, bit) operands on all 20 read ports and compares each returned bit,
// one clock later, with a reference copy. Also checks the full-word read-back
// of port 0 and a masked write.
module tb_mem_access;
  import ccss_pkg::*;
  logic clk = 0;
  operand_t [N_RP-1:0] rd_req;
  logic [N_RP-1:0] rd_bit;
  logic [WORD_W-1:0] rd_word0;
  logic we; logic [AW-1:0] wr_addr; logic [WORD_W-1:0] wr_data, wr_mask;
  int checks = 0, failures = 0;
  logic [WORD_W-1:0] ref_mem [DATA_DEPTH];

  mem_access dut (.*);
  always #5 clk = ~clk;

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wr_addr = 0; wr_data = 0; wr_mask = 0; rd_req = '0;
    for (int a = 0; a < DATA_DEPTH; a++) begin
      @(negedge clk); we = 1; wr_addr = AW'(a); wr_data = $urandom; wr_mask = '1;
      ref_mem[a] = wr_data;
    end
    // masked write
    @(negedge clk); wr_addr = 8'd7; wr_data = 32'hFFFF_FFFF; wr_mask = 32'h0000_F0F0;
    ref_mem[7] = ref_mem[7] | 32'h0000_F0F0;
    @(negedge clk); we = 0;
    for (int it = 0; it < 1000; it++) begin
      logic [N_RP-1:0] exp_bits;
      for (int p = 0; p < N_RP; p++) begin
        rd_req[p].addr   = (it < 20) ? 8'd7 : AW'($urandom);
        rd_req[p].bitsel = BIT_W'($urandom);
        exp_bits[p] = ref_mem[rd_req[p].addr][rd_req[p].bitsel];
      end
      @(posedge clk); #1;
      rd_req = '0; #1;
      for (int p = 0; p < N_RP; p++) begin
        checks++;
        if (rd_bit[p] !== exp_bits[p]) begin
          failures++;
          if (failures < 5) $display("it %0d port %0d got %b exp %b", it, p, rd_bit[p], exp_bits[p]);
        end
      end
      @(negedge clk);
    end
    // full-word read-back on port 0
    for (int a = 0; a < 16; a++) begin
      rd_req[0].addr = AW'(a);
      @(posedge clk); #1;
      checks++;
      if (rd_word0 !== ref_mem[a]) failures++;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
