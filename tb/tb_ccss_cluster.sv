// tb_ccss_cluster: self-checking test of one cluster (4 cores, crossbar,
// ring stop).
//
// Core 0 runs the 4-bit counter program and sends its next state three ways:
// to core 2 of the same cluster (through the crossbar), to core 1 of cluster
// 5 (out through the ring stop, captured by the testbench) and back to itself
// (local path). The testbench injects one flit per RTL cycle from the ring
// for core 3. Cores 1-3 compute nothing but wait for their flits. Per RTL
// cycle the test checks the ring output flit, that the cluster barrier flag
// rises only once all cores have their data, and, read back over the host
// bus, the counter in core 0, its copy in core 2 and the ring-delivered word
// in core 3. The host read latency (3 clocks) is checked as well.
module tb_ccss_cluster;
  import ccss_pkg::*;
  `include "ccss_tb_util.svh"

  localparam int CS = 4, MYCL = 2, NCYC = 10;
  logic clk = 0, rst_n = 0;
  cfg_t cfg;
  logic start, cycle_done, barrier_ok;
  logic host_rd_en; core_id_t host_rd_core; logic [AW-1:0] host_rd_addr;
  logic [WORD_W-1:0] host_rdata;
  logic ring_in_valid, ring_in_ready, ring_out_valid, ring_out_ready;
  flit_t ring_in_flit, ring_out_flit;

  ccss_cluster #(.CLUSTER_SIZE(CS)) dut (.*, .my_cluster(CL_W'(MYCL)));
  always #5 clk = ~clk;

  int checks = 0, failures = 0, n_out = 0;
  flit_t last_out;
  bit rin_done;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask
  task automatic send_cfg(cfg_t c);
    @(negedge clk); cfg = c;
    @(negedge clk); cfg.valid = 1'b0;
  endtask
  task automatic host_read(core_id_t c, int addr, output logic [WORD_W-1:0] d);
    @(negedge clk); host_rd_en = 1; host_rd_core = c; host_rd_addr = AW'(addr);
    @(negedge clk); host_rd_en = 0;
    @(negedge clk);
    @(negedge clk);
    d = host_rdata;
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) begin
    ring_out_ready = ($urandom % 2 == 0);
    #4;
    if (rst_n && ring_out_valid && ring_out_ready) begin last_out = ring_out_flit; n_out++; end
    if (rst_n && ring_in_valid && ring_in_ready) rin_done = 1;
  end

  initial begin
    logic [WORD_W-1:0] rd;
    core_id_t a, b, c, far;
    int q;
    a = cid(MYCL, 0); b = cid(MYCL, 2); c = cid(MYCL, 3); far = cid(5, 1);
    cfg = '0; start = 0; cycle_done = 0; host_rd_en = 0; host_rd_core = '0; host_rd_addr = '0;
    ring_in_valid = 0; ring_in_flit = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int s = 0; s < 3; s++)
      for (int j = 0; j < N_LUT; j++)
        send_cfg(mk_cfg(a, CFG_LUT, j, s, CFG_DW'(counter_prog(s, j))));
    send_cfg(mk_cfg(a, CFG_SYNC, 0, 0, CFG_DW'(counter_sync(far, 40, 0, 5))));
    send_cfg(mk_cfg(a, CFG_SYNC, 0, 1, CFG_DW'(counter_sync(b, 50, 4, 4))));
    send_cfg(mk_cfg(a, CFG_SYNC, 0, 2, CFG_DW'(counter_sync(a, Q_WORD, 0, 4))));
    send_cfg(mk_cfg(a, CFG_REG, 0, REG_COMP_LEN, CFG_DW'(3)));
    send_cfg(mk_cfg(a, CFG_REG, 0, REG_SYNC_LEN, CFG_DW'(3)));
    send_cfg(mk_cfg(a, CFG_DATA, 0, Q_WORD, CFG_DW'(0)));
    send_cfg(mk_cfg(b, CFG_REG, 0, REG_RX_EXPECT, CFG_DW'(1)));
    send_cfg(mk_cfg(b, CFG_DATA, 0, 50, CFG_DW'(0)));
    send_cfg(mk_cfg(c, CFG_REG, 0, REG_RX_EXPECT, CFG_DW'(1)));
    repeat (2) @(negedge clk);
    q = 0;
    for (int n = 0; n < NCYC; n++) begin
      int nq, n0;
      flit_t rf;
      nq = (q + 1) % 16; n0 = n_out; rin_done = 0;
      rf = '0; rf.dest = c; rf.waddr = AW'(70); rf.off = 5'(0); rf.len = 5'(20); rf.data = VEC_W'($urandom);
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      // ring flit arrives a little later
      repeat (2) @(negedge clk);
      chk(!barrier_ok, "barrier low while work is pending");
      ring_in_valid = 1; ring_in_flit = rf;
      while (!rin_done) @(negedge clk);
      ring_in_valid = 0;
      while (!barrier_ok) @(negedge clk);
      // the flit for cluster 5 may still sit in the ring stop: the barrier is
      // owned by its receiver, which the testbench plays
      for (int t = 0; t < 20 && n_out == n0; t++) @(negedge clk);
      chk(n_out - n0 == 1, "one flit leaves on the ring");
      chk(last_out.dest == far && last_out.data[3:0] == 4'(nq) && last_out.data[4] == ^(4'(nq)),
          "ring output flit");
      @(negedge clk); cycle_done = 1;
      @(negedge clk); cycle_done = 0;
      repeat (2) @(negedge clk);
      host_read(a, Q_WORD, rd);  chk(rd == 32'(nq), "counter in core 0");
      host_read(b, 50, rd);      chk(rd == 32'(nq << 4), "crossbar copy in core 2");
      host_read(c, 70, rd);      chk(rd[19:0] == rf.data, "ring-delivered word in core 3");
      q = nq;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
