// tb_ccss_netlist: random-netlist simulation on a 2 x 3 core array.
//
// The testbench plays the compiler on a random synchronous netlist and checks
// the accelerator's simulation of it against a direct software evaluation.
//  * Netlist: NV register vectors of 4 bits (48 flip-flops). The next state
//    of vector v is the output of its own fiber, a random DAG of NPF LUT4
//    nodes whose inputs are any register bit or an earlier node of the fiber;
//    its last four nodes are the next-state bits. Truth tables are random.
//  * Partition: core c owns fibers 2c and 2c+1 (fiber-based, no sharing).
//  * Schedule: list scheduling in topological order, five LUTs per slot, a
//    node at least two slots after each of its producers; result of slot s,
//    LUT j at word s/6, bit 5*(s%6)+j.
//  * Register state: every core keeps all 48 register bits in words 200-201
//    (bit b at word 200 + b/32, bit b%32).
//  * Sync: each core sends each of its two vectors to the five other cores
//    (remote first) and finally to itself, so it expects 10 flits per cycle.
// After every RTL cycle all six cores' copies of the state are read back and
// compared with the software model.
module tb_ccss_netlist;
  import ccss_pkg::*;
  `include "ccss_tb_util.svh"

  localparam int NCL = 2, CS = 3, NC = NCL * CS, NV = 2 * NC, NB = 4 * NV;
  localparam int NPF = 40, NCYC = 12, STATE_W = 200;

  cfg_t cfg;
  logic host_rd_en; core_id_t host_rd_core; logic [AW-1:0] host_rd_addr;
  logic [WORD_W-1:0] host_rdata;
  logic run_valid; logic [31:0] run_cycles;
  logic busy; logic [31:0] rtl_cycles, last_cycle_hw;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  ccss_top #(.N_CLUSTER(NCL), .CLUSTER_SIZE(CS)) dut (.*);

  int checks = 0, failures = 0;
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

  // netlist: src < NB is a register bit, src >= NB is node (src - NB) of the fiber
  int          src   [NV][NPF][4];
  logic [15:0] truth [NV][NPF];
  int          slot_of [NV][NPF], lut_of [NV][NPF];
  logic [NB-1:0] state;

  function automatic core_id_t core_of(int c);
    return cid(c / CS, c % CS);
  endfunction

  function automatic operand_t loc(int f, int s);
    if (s < NB) return opnd(STATE_W + s / 32, s % 32);
    return opnd(slot_of[f][s - NB] / RES_PER_WORD,
                N_LUT * (slot_of[f][s - NB] % RES_PER_WORD) + lut_of[f][s - NB]);
  endfunction

  function automatic logic [NB-1:0] model_next(logic [NB-1:0] st);
    logic [NB-1:0] nx;
    for (int f = 0; f < NV; f++) begin
      logic val [NPF];
      for (int i = 0; i < NPF; i++) begin
        logic [3:0] idx;
        for (int k = 0; k < 4; k++) idx[k] = (src[f][i][k] < NB) ? st[src[f][i][k]] : val[src[f][i][k] - NB];
        val[i] = truth[f][i][idx];
      end
      for (int k = 0; k < 4; k++) nx[4 * f + k] = val[NPF - 4 + k];
    end
    return nx;
  endfunction

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int slot_hist = 0;
  initial begin
    logic [WORD_W-1:0] rd0, rd1;
    cfg = '0; host_rd_en = 0; host_rd_core = '0; host_rd_addr = '0; run_valid = 0; run_cycles = 0;
    // random netlist
    for (int f = 0; f < NV; f++)
      for (int i = 0; i < NPF; i++) begin
        truth[f][i] = 16'($urandom);
        for (int k = 0; k < 4; k++)
          src[f][i][k] = (i > 0 && $urandom % 2 == 1) ? NB + int'($urandom % i) : int'($urandom % NB);
      end
    state = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NC; c++) begin
      int used [64];
      int comp_len, n;
      core_id_t me;
      me = core_of(c);
      foreach (used[s]) used[s] = 0;
      comp_len = 0;
      // list scheduling of fibers 2c, 2c+1
      for (int ff = 0; ff < 2; ff++) begin
        int f;
        f = 2 * c + ff;
        for (int i = 0; i < NPF; i++) begin
          int e;
          e = 0;
          for (int k = 0; k < 4; k++)
            if (src[f][i][k] >= NB && slot_of[f][src[f][i][k] - NB] + MIN_DEP_DIST > e)
              e = slot_of[f][src[f][i][k] - NB] + MIN_DEP_DIST;
          while (used[e] == N_LUT) e++;
          slot_of[f][i] = e; lut_of[f][i] = used[e]; used[e]++;
          if (e + 1 > comp_len) comp_len = e + 1;
        end
      end
      slot_hist += comp_len;
      // LUT programs: idle slots and unused LUTs get a constant-0 instruction
      for (int s = 0; s < comp_len; s++)
        for (int j = 0; j < N_LUT; j++) begin
          lut_instr_t li;
          li = lut_instr(16'h0, opnd(0,0), opnd(0,0), opnd(0,0), opnd(0,0));
          for (int ff = 0; ff < 2; ff++)
            for (int i = 0; i < NPF; i++)
              if (slot_of[2*c+ff][i] == s && lut_of[2*c+ff][i] == j)
                li = lut_instr(truth[2*c+ff][i], loc(2*c+ff, src[2*c+ff][i][0]), loc(2*c+ff, src[2*c+ff][i][1]),
                               loc(2*c+ff, src[2*c+ff][i][2]), loc(2*c+ff, src[2*c+ff][i][3]));
          send_cfg(mk_cfg(me, CFG_LUT, j, s, CFG_DW'(li)));
        end
      // sync program: remote destinations first, this core last
      n = 0;
      for (int dd = 1; dd <= NC; dd++) begin
        int d;
        d = (c + dd) % NC;
        for (int ff = 0; ff < 2; ff++) begin
          int f, w[VEC_W], b[VEC_W];
          operand_t o;
          f = 2 * c + ff;
          for (int p = 0; p < VEC_W; p++) begin w[p] = 0; b[p] = 0; end
          for (int k = 0; k < 4; k++) begin
            o = loc(f, NB + NPF - 4 + k);
            w[k] = int'(o.addr); b[k] = int'(o.bitsel);
          end
          send_cfg(mk_cfg(me, CFG_SYNC, 0, n,
                          CFG_DW'(sync_instr(core_of(d), STATE_W + (4 * f) / 32, (4 * f) % 32, 4, w, b))));
          n++;
        end
      end
      send_cfg(mk_cfg(me, CFG_REG, 0, REG_COMP_LEN, CFG_DW'(comp_len)));
      send_cfg(mk_cfg(me, CFG_REG, 0, REG_SYNC_LEN, CFG_DW'(n)));
      send_cfg(mk_cfg(me, CFG_REG, 0, REG_RX_EXPECT, CFG_DW'(2 * (NC - 1))));
      send_cfg(mk_cfg(me, CFG_DATA, 0, STATE_W, CFG_DW'(state[31:0])));
      send_cfg(mk_cfg(me, CFG_DATA, 0, STATE_W + 1, CFG_DW'(state[NB-1:32])));
    end
    $display("scheduled %0d nodes on %0d cores in %0d slots in total", NV * NPF, NC, slot_hist);

    for (int k = 1; k <= NCYC; k++) begin
      int t0;
      state = model_next(state);
      @(negedge clk); run_valid = 1; run_cycles = 1;
      @(negedge clk); run_valid = 0;
      t0 = 0;
      while (busy && t0 < 5000) begin @(negedge clk); t0++; end
      chk(!busy, "RTL cycle finished");
      for (int c = 0; c < NC; c++) begin
        host_read(core_of(c), STATE_W, rd0);
        host_read(core_of(c), STATE_W + 1, rd1);
        chk(rd0 == state[31:0] && rd1[NB-33:0] == state[NB-1:32], "register state matches the model");
        if (rd0 != state[31:0] || rd1[NB-33:0] != state[NB-1:32])
          $display("cycle %0d core %0d: got %h_%h exp %h", k, c, rd1[NB-33:0], rd0, state);
      end
      $display("RTL cycle %0d: %0d clocks", k, last_cycle_hw);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
