// tb_xbar: self-checking test of the cluster crossbar.
//
// Five ports with random traffic and random output back-pressure. Every flit
// carries its source and a per-source sequence number in its data field. The
// scoreboard checks that each flit leaves on the output it asked for, that
// flits from one input to one output keep their order, that nothing is lost
// or duplicated, and that a lone flit crosses in one clock. It also counts
// cycles in which two inputs competed for the same output (arbitration).
module tb_xbar;
  import ccss_pkg::*;
  localparam int N = 5, PW = $clog2(N), PER_SRC = 300;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] in_valid, in_ready, out_valid, out_ready;
  flit_t [N-1:0] in_flit, out_flit;
  logic [N-1:0][PW-1:0] in_dst;

  xbar #(.N_PORTS(N)) dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0, contention = 0, received = 0;
  int seq [N];
  int exp_seq [N][N];   // [src][dst] next sequence expected
  int sent_to [N][N];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // sources
  for (genvar i = 0; i < N; i++) begin : g_src
    initial begin
      in_valid[i] = 0; in_flit[i] = '0; in_dst[i] = '0; seq[i] = 0;
      wait (rst_n);
      while (seq[i] < PER_SRC || in_valid[i]) begin
        @(negedge clk);
        if (!in_valid[i] && ($urandom % 4 != 0)) begin
          int d;
          d = (i < 2) ? 4 : $urandom % N;    // inputs 0,1 both favour output 4
          in_valid[i] = 1; in_dst[i] = PW'(d);
          in_flit[i] = '0;
          in_flit[i].dest.local_id = LOC_W'(d);
          in_flit[i].waddr = AW'(i);
          in_flit[i].data = VEC_W'(seq[i]);
          sent_to[i][d]++;
          seq[i]++;
        end
        #4;
        if (in_valid[i] && in_ready[i]) begin @(posedge clk); #1 in_valid[i] = 0; end
      end
    end
  end

  // sample handshakes shortly before each rising edge
  always @(negedge clk) if (rst_n) begin
    #4;
    for (int o = 0; o < N; o++) begin
      int n;
      n = 0;
      for (int i = 0; i < N; i++) if (in_valid[i] && in_dst[i] == PW'(o)) n++;
      if (n > 1) contention++;
      if (out_valid[o] && out_ready[o]) begin
        int s, q;
        s = int'(out_flit[o].waddr); q = int'(out_flit[o].data);
        chk(int'(out_flit[o].dest.local_id) == o, "flit on the wrong output");
        if (q < exp_seq[s][o] && failures < 3) $display("o=%0d s=%0d q=%0d exp=%0d t=%0t", o, s, q, exp_seq[s][o], $time);
        chk(q >= exp_seq[s][o], "order per source/destination");
        exp_seq[s][o] = q + 1;
        received++;
      end
    end
  end

  always @(negedge clk) out_ready = N'($urandom) | N'($urandom);

  initial begin
    for (int i = 0; i < N; i++) for (int o = 0; o < N; o++) begin exp_seq[i][o] = 0; sent_to[i][o] = 0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (seq[0] == PER_SRC && seq[1] == PER_SRC && seq[2] == PER_SRC && seq[3] == PER_SRC && seq[4] == PER_SRC && in_valid == 0);
    repeat (200) @(negedge clk);
    chk(received == N * PER_SRC, "every flit delivered once");
    chk(in_valid == '0, "inputs drained");
    chk(contention > 0, "output contention exercised");
    // single-flit latency: one clock from acceptance to output register
    @(negedge clk);
    force out_ready = '1;
    in_valid[2] = 1; in_dst[2] = 3'(1); in_flit[2] = '0; in_flit[2].dest.local_id = 6'(1);
    #4;
    chk(in_ready[2], "lone flit granted at once");
    @(posedge clk); #1;
    chk(out_valid[1] && out_flit[1].dest.local_id == 6'(1), "one-clock crossbar latency");
    in_valid[2] = 0;
    release out_ready;
    $display("received=%0d contention=%0d", received, contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
