// tb_sync_engine: self-checking test of the synchronisation engine.
//
// The testbench plays the memory access circuit (returns the addressed bits
// of a reference memory one clock after each request), the NoC (random
// injection back-pressure, ejection traffic) and the core (start, accept_en).
// It loads a random sync program in which some vectors go to this core (local
// path) and the rest to other cores, and checks: every remote flit's header
// and gathered data, in program order; every local write (address, aligned
// data, mask); received flits written with priority and only while accept_en
// is high; done only after all sends and the expected receives.
module tb_sync_engine;
  import ccss_pkg::*;
  `include "ccss_tb_util.svh"

  localparam int NPROG = 24;
  logic clk = 0, rst_n = 0;
  core_id_t my_id;
  logic cfg_we; logic [5:0] cfg_addr; sync_instr_t cfg_instr;
  logic [6:0] sync_len; logic [RXC_W-1:0] rx_expect;
  logic start, accept_en, done;
  operand_t [N_RP-1:0] rd_req; logic [N_RP-1:0] rd_bit;
  logic inj_valid, inj_ready, ej_valid, ej_ready;
  flit_t inj_flit, ej_flit;
  logic wr_en; logic [AW-1:0] wr_addr; logic [WORD_W-1:0] wr_data, wr_mask;

  sync_engine dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [WORD_W-1:0] mem [DATA_DEPTH];
  sync_instr_t prog [NPROG];
  flit_t exp_remote[$], exp_local[$], exp_rx[$];
  int n_local = 0, n_remote = 0, n_rx = 0, stall_cycles = 0, rx_blocked = 0, rx_over_local = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  // memory access model: bits one clock after the request
  always_ff @(posedge clk)
    for (int p = 0; p < N_RP; p++) rd_bit[p] <= mem[rd_req[p].addr][rd_req[p].bitsel];

  function automatic flit_t expect_flit(sync_instr_t si);
    flit_t f;
    f.dest = si.dest; f.waddr = si.waddr; f.off = si.off; f.len = si.len;
    for (int p = 0; p < VEC_W; p++) f.data[p] = mem[si.op[p].addr][si.op[p].bitsel];
    return f;
  endfunction

  // monitors
  always @(posedge clk) if (rst_n) begin
    if (inj_valid && !inj_ready) stall_cycles++;
    if (ej_valid && !ej_ready) rx_blocked++;
    if (inj_valid && inj_ready) begin
      flit_t e;
      chk(exp_remote.size() > 0, "unexpected remote flit");
      if (exp_remote.size() > 0) begin
        e = exp_remote.pop_front();
        chk(inj_flit == e, "remote flit contents");
      end
      n_remote++;
    end
    if (wr_en) begin
      flit_t e;
      if (ej_valid && ej_ready) begin
        e = exp_rx.pop_front(); n_rx++;
        if (inj_valid == 0 && exp_local.size() > 0 && dut.q_cnt != 0 && dut.head_local) rx_over_local++;
      end else begin
        chk(exp_local.size() > 0, "unexpected local write");
        e = exp_local.pop_front(); n_local++;
      end
      chk(wr_addr == e.waddr, "write address");
      chk(wr_mask == WORD_W'(((64'(1) << e.len) - 1) << e.off), "write mask");
      chk((wr_data & wr_mask) == WORD_W'((64'(e.data) << e.off) & (((64'(1) << e.len) - 1) << e.off)),
          "write data");
    end
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    my_id = cid(3, 9);
    cfg_we = 0; cfg_addr = 0; cfg_instr = '0; sync_len = 0; rx_expect = 0;
    start = 0; accept_en = 0; inj_ready = 0; ej_valid = 0; ej_flit = '0;
    for (int a = 0; a < DATA_DEPTH; a++) mem[a] = $urandom;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int round = 0; round < 3; round++) begin
      int nrx;
      // program
      for (int i = 0; i < NPROG; i++) begin
        sync_instr_t si;
        si = sync_instr_t'({$urandom, $urandom, $urandom, $urandom, $urandom,
                            $urandom, $urandom, $urandom, $urandom, $urandom});
        si.len = LEN_W'(1 + $urandom % VEC_W);
        si.off = BIT_W'($urandom % (WORD_W - si.len + 1));
        si.dest = ($urandom % 3 == 0) ? my_id : cid($urandom % 36, $urandom % 36);
        if (si.dest != my_id && si.dest.cluster == 3 && si.dest.local_id == 9) si.dest.local_id = 1;
        prog[i] = si;
        @(negedge clk); cfg_we = 1; cfg_addr = 6'(i); cfg_instr = si;
      end
      @(negedge clk); cfg_we = 0;
      for (int i = 0; i < NPROG; i++) begin
        flit_t f; f = expect_flit(prog[i]);
        if (prog[i].dest == my_id) exp_local.push_back(f); else exp_remote.push_back(f);
      end
      nrx = 5 + round;
      sync_len = 7'(NPROG); rx_expect = RXC_W'(nrx);
      // received flits are offered before accept_en rises
      fork
        begin
          for (int k = 0; k < nrx; k++) begin
            flit_t f;
            f.dest = my_id; f.waddr = AW'($urandom); f.len = LEN_W'(1 + $urandom % VEC_W);
            f.off = BIT_W'($urandom % (WORD_W - f.len + 1)); f.data = VEC_W'($urandom);
            @(negedge clk); ej_valid = 1; ej_flit = f;
            exp_rx.push_back(f);
            do @(posedge clk); while (!ej_ready);
            @(negedge clk); ej_valid = 0;
            repeat ($urandom % 4) @(negedge clk);
          end
        end
        begin
          repeat (6) @(negedge clk);
          chk(!done || round == 0, "done before start");
          accept_en = 1; start = 1;
          @(negedge clk); start = 0;
        end
      join_none
      // random back-pressure on injection (round 2: always ready, rate check)
      begin
        int t0, issued;
        t0 = 0; issued = 0;
        while (!(done && exp_remote.size() == 0 && exp_local.size() == 0 && exp_rx.size() == 0)) begin
          @(negedge clk);
          inj_ready = (round == 2) ? 1'b1 : ($urandom % 3 != 0);
          t0++;
          if (t0 > 5000) break;
        end
      end
      chk(exp_remote.size() == 0 && exp_local.size() == 0, "all vectors sent");
      chk(exp_rx.size() == 0, "all received flits written");
      chk(done, "done at the end");
      @(negedge clk); accept_en = 0;
      wait fork;
    end
    chk(n_local > 0 && n_remote > 0 && n_rx > 0, "local, remote and received traffic all seen");
    chk(stall_cycles > 0, "injection back-pressure seen");
    chk(rx_blocked > 0, "ejection held off before accept_en");
    $display("local=%0d remote=%0d rx=%0d stalls=%0d rx_blocked=%0d", n_local, n_remote, n_rx, stall_cycles, rx_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // received flits must not be accepted while accept_en is low
  always @(posedge clk) if (rst_n && ej_valid && !accept_en) begin
    checks++; if (ej_ready) failures++;
  end
endmodule
