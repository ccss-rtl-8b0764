// ccss_top_test.svh: end-to-end test body for ccss_top, included by
// tb_ccss_top (3 x 4 cores), tb_ccss_top_ring (36 x 4) and tb_ccss_top_wide (2 x 36).
// The including module defines NCL and CS (clusters, cores per cluster) and
// the instance `dut`, and a watchdog that ends a hung run.
//
// Simulated netlist, spread over four cores (A, B, C, E):
//  A = (0,0)  4-bit counter (ccss_tb_util.svh). Sends its next state to B
//             over the ring (1 hop), to E over the ring (NCL-1 hops), to C
//             through cluster 0's crossbar, and to itself by the local path.
//  C = (0,3)  inverts its copy of the counter; sends the result to B (ring).
//             A and C both send to cluster 1, so they compete for the
//             crossbar's ring port.
//  B = (1,1)  copies its (previous-cycle) counter copy through four identity
//             LUTs and sends it to E; it computes for 40 slots, so the flits
//             for B arrive while it is still computing and are held off.
//  E = (NCL-1,2) receives from A and B.
// After RTL cycle k (counter value k mod 16) the test reads back, over the
// host bus: A's counter = k; B's copy = k; C's copy = k; E's copy and parity
// = k; B's word from C = ~(k-1); E's word from B = k-1. It also counts how
// often each mechanism occurred and fails if one never did.

localparam int NCYC = 6;
cfg_t cfg;
logic host_rd_en; core_id_t host_rd_core; logic [AW-1:0] host_rd_addr;
logic [WORD_W-1:0] host_rdata;
logic run_valid; logic [31:0] run_cycles;
logic busy; logic [31:0] rtl_cycles, last_cycle_hw;
logic clk = 0, rst_n = 0;
always #5 clk = ~clk;

int checks = 0, failures = 0;
int m_compute = 0, m_gather = 0, m_local = 0, m_xbar_local = 0, m_ring_hop = 0,
    m_xbar_contention = 0, m_ej_hold = 0, m_barrier = 0, m_ring_inj_block = 0;

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
  repeat (3) @(negedge clk);
  d = host_rdata;
endtask

function automatic lut_instr_t ident_instr(int j, int word, int base);
  logic [15:0] t;
  for (int i = 0; i < 16; i++) t[i] = (i >> j) & 1;
  return lut_instr(t, opnd(word, base), opnd(word, base + 1), opnd(word, base + 2), opnd(word, base + 3));
endfunction
function automatic lut_instr_t not_instr(int j, int word, int base);
  logic [15:0] t;
  for (int i = 0; i < 16; i++) t[i] = !((i >> j) & 1);
  return lut_instr(t, opnd(word, base), opnd(word, base + 1), opnd(word, base + 2), opnd(word, base + 3));
endfunction
function automatic lut_instr_t nop_instr();
  return lut_instr(16'h0, opnd(0,0), opnd(0,0), opnd(0,0), opnd(0,0));
endfunction
function automatic sync_instr_t word0_sync(core_id_t dest, int waddr, int off, int len);
  int w[VEC_W], b[VEC_W];
  for (int p = 0; p < VEC_W; p++) begin w[p] = 0; b[p] = p; end
  return sync_instr(dest, waddr, off, len, w, b);
endfunction

// mechanism monitors (probes of cores A, B and cluster 0/1)
always @(negedge clk) if (rst_n) begin
  #4;
  if (dut.g_cl[0].u_cluster.g_core[0].u_core.phase_o == 2'd1) m_compute++;
  if (dut.g_cl[0].u_cluster.g_core[0].u_core.u_sync.s2) m_gather++;
  if (dut.g_cl[0].u_cluster.g_core[0].u_core.u_sync.loc_take) m_local++;
  if (dut.g_cl[0].u_cluster.u_xbar.out_valid[3] && dut.g_cl[0].u_cluster.u_xbar.out_ready[3]) m_xbar_local++;
  for (int i = 0; i < NCL; i++) if (dut.r_valid[i] && dut.r_ready[i]) m_ring_hop++;
  for (int o = 0; o <= CS; o++)
    if ($countones(dut.g_cl[0].u_cluster.u_xbar.req[o]) > 1) m_xbar_contention++;
  if (dut.g_cl[1].u_cluster.g_core[1].u_core.ej_valid && !dut.g_cl[1].u_cluster.g_core[1].u_core.ej_ready)
    m_ej_hold++;
  if (dut.u_ctrl.cycle_done) m_barrier++;
  if (dut.g_cl[1].u_cluster.u_stop.inj_valid && !dut.g_cl[1].u_cluster.u_stop.inj_ready) m_ring_inj_block++;
end

initial begin
  logic [WORD_W-1:0] rd;
  core_id_t a, b, c, e;
  int t0;
  a = cid(0, 0); b = cid(1, 1); c = cid(0, 3); e = cid(NCL - 1, 2);
  cfg = '0; host_rd_en = 0; host_rd_core = '0; host_rd_addr = '0; run_valid = 0; run_cycles = 0;
  repeat (3) @(negedge clk);
  rst_n = 1;
  // core A: counter
  for (int s = 0; s < 3; s++)
    for (int j = 0; j < N_LUT; j++)
      send_cfg(mk_cfg(a, CFG_LUT, j, s, CFG_DW'(counter_prog(s, j))));
  send_cfg(mk_cfg(a, CFG_SYNC, 0, 0, CFG_DW'(counter_sync(b, 50, 4, 4))));
  send_cfg(mk_cfg(a, CFG_SYNC, 0, 1, CFG_DW'(counter_sync(e, 51, 0, 5))));
  send_cfg(mk_cfg(a, CFG_SYNC, 0, 2, CFG_DW'(counter_sync(c, 52, 8, 4))));
  send_cfg(mk_cfg(a, CFG_SYNC, 0, 3, CFG_DW'(counter_sync(a, Q_WORD, 0, 4))));
  send_cfg(mk_cfg(a, CFG_REG, 0, REG_COMP_LEN, CFG_DW'(3)));
  send_cfg(mk_cfg(a, CFG_REG, 0, REG_SYNC_LEN, CFG_DW'(4)));
  send_cfg(mk_cfg(a, CFG_DATA, 0, Q_WORD, CFG_DW'(0)));
  // core C: inverter of its counter copy, then to B
  for (int s = 0; s < 3; s++)
    for (int j = 0; j < N_LUT; j++)
      send_cfg(mk_cfg(c, CFG_LUT, j, s, CFG_DW'((s == 0 && j < 4) ? not_instr(j, 52, 8) : nop_instr())));
  send_cfg(mk_cfg(c, CFG_SYNC, 0, 0, CFG_DW'(word0_sync(b, 53, 0, 4))));
  send_cfg(mk_cfg(c, CFG_REG, 0, REG_COMP_LEN, CFG_DW'(3)));
  send_cfg(mk_cfg(c, CFG_REG, 0, REG_SYNC_LEN, CFG_DW'(1)));
  send_cfg(mk_cfg(c, CFG_REG, 0, REG_RX_EXPECT, CFG_DW'(1)));
  send_cfg(mk_cfg(c, CFG_DATA, 0, 52, CFG_DW'(0)));
  // core B: 40 compute slots (identity copy in slot 0), then to E
  for (int s = 0; s < 40; s++)
    for (int j = 0; j < N_LUT; j++)
      send_cfg(mk_cfg(b, CFG_LUT, j, s, CFG_DW'((s == 0 && j < 4) ? ident_instr(j, 50, 4) : nop_instr())));
  send_cfg(mk_cfg(b, CFG_SYNC, 0, 0, CFG_DW'(word0_sync(e, 54, 0, 4))));
  send_cfg(mk_cfg(b, CFG_REG, 0, REG_COMP_LEN, CFG_DW'(40)));
  send_cfg(mk_cfg(b, CFG_REG, 0, REG_SYNC_LEN, CFG_DW'(1)));
  send_cfg(mk_cfg(b, CFG_REG, 0, REG_RX_EXPECT, CFG_DW'(2)));
  send_cfg(mk_cfg(b, CFG_DATA, 0, 50, CFG_DW'(0)));
  // core E: receives two vectors
  send_cfg(mk_cfg(e, CFG_REG, 0, REG_RX_EXPECT, CFG_DW'(2)));
  repeat (4) @(negedge clk);

  for (int k = 1; k <= NCYC; k++) begin
    int kq, pq;
    kq = k % 16; pq = (k - 1) % 16;
    @(negedge clk); run_valid = 1; run_cycles = 1;
    @(negedge clk); run_valid = 0;
    t0 = 0;
    while (busy && t0 < 5000) begin @(negedge clk); t0++; end
    chk(!busy, "RTL cycle finished");
    chk(rtl_cycles == 32'(k), "RTL cycle count");
    // B computes 40 slots + 3 fill/drain clocks before it can finish
    chk(last_cycle_hw >= 32'(43), "cycle time covers the slowest core");
    repeat (2) @(negedge clk);
    host_read(a, Q_WORD, rd); chk(rd == 32'(kq), "A counter");
    host_read(b, 50, rd);     chk(rd[7:4] == 4'(kq), "B copy over 1 ring hop");
    host_read(c, 52, rd);     chk(rd[11:8] == 4'(kq), "C copy through the crossbar");
    host_read(e, 51, rd);     chk(rd[4:0] == {^(4'(kq)), 4'(kq)}, "E copy over the ring wrap");
    host_read(b, 53, rd);     chk(rd[3:0] == ~4'(pq), "B word from C (inverted)");
    host_read(e, 54, rd);     chk(rd[3:0] == 4'(pq), "E word from B");
    $display("RTL cycle %0d: %0d clocks", k, last_cycle_hw);
  end
  // a multi-cycle run
  @(negedge clk); run_valid = 1; run_cycles = 3;
  @(negedge clk); run_valid = 0;
  t0 = 0;
  while (busy && t0 < 20000) begin @(negedge clk); t0++; end
  chk(rtl_cycles == 32'(NCYC + 3), "multi-cycle run");
  host_read(a, Q_WORD, rd); chk(rd == 32'((NCYC + 3) % 16), "A counter after multi-cycle run");
  host_read(e, 51, rd);     chk(rd[3:0] == 4'((NCYC + 3) % 16), "E copy after multi-cycle run");

  $display("mechanisms: compute=%0d gather=%0d local=%0d xbar_local=%0d ring_hops=%0d xbar_contention=%0d ej_hold=%0d barrier=%0d ring_inj_block=%0d",
           m_compute, m_gather, m_local, m_xbar_local, m_ring_hop, m_xbar_contention, m_ej_hold, m_barrier, m_ring_inj_block);
  chk(m_compute > 0, "compute phase occurred");
  chk(m_gather > 0, "register-vector gather occurred");
  chk(m_local > 0, "local-path write occurred");
  chk(m_xbar_local > 0, "intra-cluster crossbar delivery occurred");
  chk(m_ring_hop >= NCYC * (1 + (NCL - 1) + 1 + 1), "inter-cluster ring hops occurred");
  chk(m_xbar_contention > 0, "crossbar arbitration occurred");
  chk(m_ej_hold > 0, "ejection held off during compute occurred");
  chk(m_barrier == NCYC + 3, "one barrier release per RTL cycle");
  $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  $finish;
end
