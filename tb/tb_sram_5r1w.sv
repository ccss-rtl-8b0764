// tb_sram_5r1w: self-checking test of one 5R1W data-memory bank.
//
// Random masked writes and five random reads every clock against a reference
// array kept in the testbench. Checks the one-clock read latency, the bit
// mask and read-before-write on a same-word collision.
module tb_sram_5r1w;
  localparam int N_RD = 5, W = 32, D = 256, AW = 8;
  logic clk = 0;
  logic [N_RD-1:0][AW-1:0] rd_addr;
  logic [N_RD-1:0][W-1:0]  rd_data;
  logic we; logic [AW-1:0] wr_addr; logic [W-1:0] wr_data, wr_mask;
  int checks = 0, failures = 0;
  logic [W-1:0] ref_mem [D];
  logic [N_RD-1:0][W-1:0] expect_q;
  int collisions = 0;

  sram_5r1w #(.N_RD(N_RD), .WORD_W(W), .DEPTH(D)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    we = 0; wr_addr = 0; wr_data = 0; wr_mask = 0; rd_addr = '0;
    // initialise every word through the write port
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; wr_addr = AW'(a); wr_data = $urandom; wr_mask = '1;
      ref_mem[a] = wr_data;
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 2000; it++) begin
      @(negedge clk);
      we = ($urandom % 2) == 1;
      wr_addr = AW'($urandom % 16);      // small range -> collisions
      wr_data = $urandom; wr_mask = $urandom;
      for (int p = 0; p < N_RD; p++) begin
        rd_addr[p] = AW'($urandom % 16);
        expect_q[p] = ref_mem[rd_addr[p]];   // old contents
        if (we && rd_addr[p] == wr_addr) collisions++;
      end
      @(posedge clk); #1;
      if (we) ref_mem[wr_addr] = (ref_mem[wr_addr] & ~wr_mask) | (wr_data & wr_mask);
      for (int p = 0; p < N_RD; p++) begin
        checks++;
        if (rd_data[p] !== expect_q[p]) begin
          failures++;
          if (failures < 5) $display("port %0d addr %0d got %h exp %h", p, rd_addr[p], rd_data[p], expect_q[p]);
        end
      end
    end
    if (collisions == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
