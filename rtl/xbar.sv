// xbar: intra-cluster crossbar of the synchronisation network.
//
// N_PORTS inputs and outputs carrying flits with valid/ready handshakes. Each
// input names its output port in in_dst (computed by the cluster from the
// flit's destination). Every output has a round-robin arbiter and a one-flit
// output register: a granted flit moves from input to output register in one
// clock, so any-to-any traffic inside a cluster takes a single hop. An input
// is ready in the cycle its flit is granted; an output register accepts a new
// flit when it is empty or being drained.
//
// A crossbar inside each cluster follows the published design; the
// arbitration policy and output buffering are this design's choices.
module xbar
  import ccss_pkg::*;
#(
  parameter int N_PORTS = DEF_CLUSTER_SIZE + 1,
  localparam int PW     = $clog2(N_PORTS)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic  [N_PORTS-1:0]       in_valid,
  input  flit_t [N_PORTS-1:0]       in_flit,
  input  logic  [N_PORTS-1:0][PW-1:0] in_dst,
  output logic  [N_PORTS-1:0]       in_ready,
  output logic  [N_PORTS-1:0]       out_valid,
  output flit_t [N_PORTS-1:0]       out_flit,
  input  logic  [N_PORTS-1:0]       out_ready
);
  logic [N_PORTS-1:0][N_PORTS-1:0] req, gnt;   // [output][input]
  logic [N_PORTS-1:0]              can_take;

  for (genvar o = 0; o < N_PORTS; o++) begin : g_out
    for (genvar i = 0; i < N_PORTS; i++) begin : g_req
      assign req[o][i] = in_valid[i] && (in_dst[i] == PW'(o));
    end
    assign can_take[o] = !out_valid[o] || out_ready[o];

    logic [N_PORTS-1:0] g;
    rr_arb #(.N(N_PORTS)) u_arb (
      .clk, .rst_n, .req(req[o] & {N_PORTS{can_take[o]}}), .advance(can_take[o]), .gnt(g));
    assign gnt[o] = g;

    flit_t sel;
    always_comb begin
      sel = '0;
      for (int i = 0; i < N_PORTS; i++) if (g[i]) sel = in_flit[i];
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) out_valid[o] <= 1'b0;
      else if (can_take[o]) out_valid[o] <= (g != '0);
    end
    always_ff @(posedge clk)
      if (can_take[o] && g != '0) out_flit[o] <= sel;
  end

  always_comb begin
    in_ready = '0;
    for (int o = 0; o < N_PORTS; o++) in_ready |= gnt[o];
  end

  // at most one output grants each input
  for (genvar i = 0; i < N_PORTS; i++) begin : g_chk
    logic [N_PORTS-1:0] col;
    for (genvar o = 0; o < N_PORTS; o++) begin : g_col
      assign col[o] = gnt[o][i];
    end
    assert property (@(posedge clk) disable iff (!rst_n) $onehot0(col));
  end
endmodule
