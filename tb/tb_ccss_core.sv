// tb_ccss_core: self-checking test of one computing core, end to end.
//
// The core is loaded over the host bus with the 4-bit counter program of
// ccss_tb_util.svh (next state in slot 0, parity in slot 2) and a two-entry
// sync program: vector 0 (next state + parity) goes to a remote core through
// the NoC injection port, vector 1 (next state) is written back to this
// core's own register word by the local path. The testbench plays the NoC:
// random injection back-pressure, and one incoming flit per RTL cycle offered
// from the start of the cycle. For each of several RTL cycles it checks:
//  * the compute phase lasts comp_len + 3 clocks (pipeline fill and drain);
//  * the incoming flit is held off during computation and written afterwards;
//  * barrier_ok rises only after that flit has been written;
//  * the remote flit's header, counter value and parity;
//  * read back over the host bus: the register word holds the next counter
//    value, the slot-result word holds the LUT outputs, the received word
//    holds the incoming vector.
module tb_ccss_core;
  import ccss_pkg::*;
  `include "ccss_tb_util.svh"

  localparam int NCYC = 20, COMP_LEN = 3;
  logic clk = 0, rst_n = 0;
  core_id_t core_id;
  cfg_t cfg;
  logic start, cycle_done, barrier_ok;
  logic [1:0] phase_o;
  logic host_rd_en; core_id_t host_rd_core; logic [AW-1:0] host_rd_addr;
  logic [WORD_W-1:0] host_rdata;
  logic inj_valid, inj_ready, ej_valid, ej_ready;
  flit_t inj_flit, ej_flit;

  ccss_core dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int comp_clocks = 0, ej_held = 0, inj_stalls = 0, n_inj = 0;
  bit ej_done;
  flit_t last_inj;
  core_id_t remote;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic send_cfg(cfg_t c);
    @(negedge clk); cfg = c;
    @(negedge clk); cfg.valid = 1'b0;
  endtask

  task automatic host_read(int addr, output logic [WORD_W-1:0] d);
    @(negedge clk); host_rd_en = 1; host_rd_core = core_id; host_rd_addr = AW'(addr);
    @(negedge clk); host_rd_en = 0;
    d = host_rdata;
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // NoC model: sample handshakes shortly before each rising edge
  always @(negedge clk) begin
    inj_ready = ($urandom % 3 != 0);
    #4;
    if (rst_n) begin
      if (phase_o == 2'd1) comp_clocks++;
      if (ej_valid && !ej_ready) ej_held++;
      if (inj_valid && !inj_ready) inj_stalls++;
      if (inj_valid && inj_ready) begin last_inj = inj_flit; n_inj++; end
      if (ej_valid && ej_ready) ej_done = 1;
      if (barrier_ok) chk(ej_done, "barrier only after the incoming flit was written");
    end
  end

  initial begin
    logic [WORD_W-1:0] rd;
    int q;
    flit_t rx;
    core_id = cid(0, 1); remote = cid(2, 7);
    cfg = '0; start = 0; cycle_done = 0; host_rd_en = 0; host_rd_core = '0; host_rd_addr = '0;
    ej_valid = 0; ej_flit = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // program load
    for (int s = 0; s < COMP_LEN; s++)
      for (int j = 0; j < N_LUT; j++)
        send_cfg(mk_cfg(core_id, CFG_LUT, j, s, CFG_DW'(counter_prog(s, j))));
    send_cfg(mk_cfg(core_id, CFG_SYNC, 0, 0, CFG_DW'(counter_sync(remote, 50, 0, 5))));
    send_cfg(mk_cfg(core_id, CFG_SYNC, 0, 1, CFG_DW'(counter_sync(core_id, Q_WORD, 0, 4))));
    send_cfg(mk_cfg(core_id, CFG_REG, 0, REG_COMP_LEN, CFG_DW'(COMP_LEN)));
    send_cfg(mk_cfg(core_id, CFG_REG, 0, REG_SYNC_LEN, CFG_DW'(2)));
    send_cfg(mk_cfg(core_id, CFG_REG, 0, REG_RX_EXPECT, CFG_DW'(1)));
    send_cfg(mk_cfg(core_id, CFG_DATA, 0, Q_WORD, CFG_DW'(0)));
    // a core that is not addressed ignores the bus
    send_cfg(mk_cfg(cid(0, 2), CFG_DATA, 0, Q_WORD, CFG_DW'(32'hFFFF_FFFF)));
    q = 0;
    for (int n = 0; n < NCYC; n++) begin
      int nq, c0, h0, inj0;
      nq = (q + 1) % 16;
      c0 = comp_clocks; h0 = ej_held; inj0 = n_inj; ej_done = 0;
      rx.dest = core_id; rx.waddr = AW'(60); rx.off = 5'(3); rx.len = 5'(7); rx.data = VEC_W'($urandom);
      @(negedge clk); start = 1; ej_valid = 1; ej_flit = rx;
      @(negedge clk); start = 0;
      fork
        begin
          while (!ej_done) @(negedge clk);
          ej_valid = 0;
        end
      join_none
      while (!barrier_ok) @(negedge clk);
      chk(comp_clocks - c0 == COMP_LEN + 3, "compute phase = comp_len + 3 clocks");
      chk(ej_held - h0 > 0, "incoming flit held off while computing");
      chk(n_inj - inj0 == 1, "one remote flit per RTL cycle");
      chk(last_inj.dest == remote && last_inj.waddr == AW'(50) && last_inj.off == 0 && last_inj.len == 5'(5),
          "remote flit header");
      chk(last_inj.data[3:0] == 4'(nq), "remote flit carries the next counter value");
      chk(last_inj.data[4] == ^(4'(nq)), "remote flit carries the parity");
      @(negedge clk); cycle_done = 1;
      @(negedge clk); cycle_done = 0;
      @(negedge clk);
      chk(phase_o == 2'd0, "core idle after release");
      host_read(Q_WORD, rd);
      chk(rd == 32'(nq), "register word updated by the local path");
      host_read(0, rd);
      chk(rd[14:0] == {4'b0, ^(4'(nq)), 5'b0, 1'b0, 4'(nq)}, "slot results packed in word 0");
      host_read(60, rd);
      chk(rd[9:3] == rx.data[6:0], "received vector written at its offset");
      q = nq;
    end
    host_read(Q_WORD, rd);
    chk(rd == 32'(NCYC % 16), "counter after all cycles");
    chk(inj_stalls > 0, "injection back-pressure exercised");
    $display("comp_clocks=%0d ej_held=%0d inj_stalls=%0d", comp_clocks, ej_held, inj_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
