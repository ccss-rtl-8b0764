// rr_arb: round-robin arbiter.
//
// Grants one of N requesters (one-hot gnt, combinational from req). The
// search starts one past the last granted requester; the pointer moves only
// when `advance` is high, i.e. when the grant was actually used. Helper of
// the cluster crossbar; the round-robin policy is this design's choice.
module rr_arb #(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt
);
  localparam int PW = (N > 1) ? $clog2(N) : 1;
  logic [PW-1:0] last;

  always_comb begin
    int idx;
    gnt = '0;
    for (int i = 1; i <= N; i++) begin
      idx = (int'(last) + i) % N;
      if (req[idx] && gnt == '0) gnt[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= PW'(N - 1);
    else if (advance && gnt != '0)
      for (int i = 0; i < N; i++) if (gnt[i]) last <= PW'(i);
  end
endmodule
