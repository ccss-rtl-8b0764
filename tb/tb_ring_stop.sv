// tb_ring_stop: self-checking test of the inter-cluster ring stop.
//
// Four stops are closed into a ring. Every stop injects random flits for the
// other clusters and drains its ejection port with random back-pressure. The
// scoreboard checks that each flit is ejected exactly once, at the stop of
// its destination cluster, and in order per (source, destination) pair; that
// the ring drains completely (no deadlock under heavy load); and that a lone
// flit takes one clock per hop.
module tb_ring_stop;
  import ccss_pkg::*;
  localparam int NS = 4, PER_SRC = 400;
  logic clk = 0, rst_n = 0;
  logic [NS-1:0] r_valid, r_ready, inj_valid, inj_ready, ej_valid, ej_ready;
  flit_t [NS-1:0] r_flit, inj_flit, ej_flit;

  for (genvar i = 0; i < NS; i++) begin : g_stop
    localparam int PREV = (i + NS - 1) % NS;
    ring_stop u_stop (
      .clk, .rst_n, .my_cluster(CL_W'(i)),
      .ring_in_valid(r_valid[PREV]), .ring_in_flit(r_flit[PREV]), .ring_in_ready(r_ready[PREV]),
      .ring_out_valid(r_valid[i]), .ring_out_flit(r_flit[i]), .ring_out_ready(r_ready[i]),
      .inj_valid(inj_valid[i]), .inj_flit(inj_flit[i]), .inj_ready(inj_ready[i]),
      .ej_valid(ej_valid[i]), .ej_flit(ej_flit[i]), .ej_ready(ej_ready[i]));
  end
  always #5 clk = ~clk;

  int checks = 0, failures = 0, received = 0, inj_blocked = 0;
  int seq [NS];
  int exp_seq [NS][NS];
  int pending = 0;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  for (genvar i = 0; i < NS; i++) begin : g_src
    initial begin
      inj_valid[i] = 0; inj_flit[i] = '0; seq[i] = 0;
      wait (rst_n);
      while (seq[i] < PER_SRC || inj_valid[i]) begin
        @(negedge clk);
        if (!inj_valid[i] && seq[i] < PER_SRC && ($urandom % 3 != 0)) begin
          int d;
          d = (i + 1 + $urandom % (NS - 1)) % NS;
          inj_valid[i] = 1;
          inj_flit[i] = '0;
          inj_flit[i].dest.cluster = CL_W'(d);
          inj_flit[i].waddr = AW'(i);
          inj_flit[i].data = VEC_W'(seq[i]);
          seq[i]++;
        end
        #4;
        if (inj_valid[i] && !inj_ready[i]) inj_blocked++;
        if (inj_valid[i] && inj_ready[i]) begin @(posedge clk); #1 inj_valid[i] = 0; end
      end
    end
  end

  always @(negedge clk) ej_ready = NS'($urandom);

  always @(negedge clk) if (rst_n) begin
    #4;
    for (int o = 0; o < NS; o++) if (ej_valid[o] && ej_ready[o]) begin
      int s, q;
      s = int'(ej_flit[o].waddr); q = int'(ej_flit[o].data);
      chk(int'(ej_flit[o].dest.cluster) == o, "ejected at the wrong stop");
      chk(q >= exp_seq[s][o], "order per source/destination");
      exp_seq[s][o] = q + 1;
      received++;
    end
  end

  initial begin
    for (int i = 0; i < NS; i++) for (int o = 0; o < NS; o++) exp_seq[i][o] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (seq[0] == PER_SRC && seq[1] == PER_SRC && seq[2] == PER_SRC && seq[3] == PER_SRC && inj_valid == 0);
    repeat (100) @(negedge clk);
    chk(received == NS * PER_SRC, "every flit delivered exactly once");
    chk(r_valid == '0 && ej_valid == '0, "ring drained");
    chk(inj_blocked > 0, "in-transit priority / bubble rule held injection");
    // latency of a lone flit from stop 0 to stop 3: three hops
    force ej_ready = '1;
    @(negedge clk);
    inj_valid[0] = 1; inj_flit[0] = '0; inj_flit[0].dest.cluster = CL_W'(3); inj_flit[0].waddr = AW'(0);
    inj_flit[0].data = VEC_W'(exp_seq[0][3]);
    @(posedge clk); #1 inj_valid[0] = 0;
    begin
      int t;
      t = 0;
      while (!ej_valid[3] && t < 20) begin @(posedge clk); #1 t++; end
      // injected at edge 0, queued at stops 0,1,2 (one clock each), ejection register at stop 3
      chk(t == 3, "one clock per hop");
      $display("lone flit 0->3 ejected %0d clocks after injection", t);
    end
    release ej_ready;
    $display("received=%0d inj_blocked=%0d", received, inj_blocked);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
