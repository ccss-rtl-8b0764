// ccss_cluster: a cluster of cores joined by a crossbar, with one ring stop.
//
// CLUSTER_SIZE cores and the cluster's ring stop are the N+1 ports of the
// crossbar. A flit whose destination cluster is this one goes straight to the
// destination core's ejection port; any other flit goes to the ring stop and
// travels the inter-cluster ring. Flits arriving from the ring enter the
// crossbar on the ring port and are always delivered locally.
// The host bus (program/data load and read-back) is registered once here, so
// a host read returns three clocks after the request. barrier_ok is the AND
// of the cores' barrier flags, registered (one clock late).
//
// Grouping cores into crossbar-connected clusters on a ring follows the
// published design; the cluster size default (36) is the published 36x36
// configuration. The host bus pipeline is this design's choice.
module ccss_cluster
  import ccss_pkg::*;
#(
  parameter int CLUSTER_SIZE = DEF_CLUSTER_SIZE,
  localparam int NP = CLUSTER_SIZE + 1,
  localparam int PW = $clog2(NP)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [CL_W-1:0]   my_cluster,
  input  cfg_t              cfg,
  input  logic              start,
  input  logic              cycle_done,
  output logic              barrier_ok,
  input  logic              host_rd_en,
  input  core_id_t          host_rd_core,
  input  logic [AW-1:0]     host_rd_addr,
  output logic [WORD_W-1:0] host_rdata,
  input  logic              ring_in_valid,
  input  flit_t             ring_in_flit,
  output logic              ring_in_ready,
  output logic              ring_out_valid,
  output flit_t             ring_out_flit,
  input  logic              ring_out_ready
);
  cfg_t              cfg_q;
  logic              hrd_en_q;
  core_id_t          hrd_core_q;
  logic [AW-1:0]     hrd_addr_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_q      <= '0;
      hrd_en_q   <= 1'b0;
      hrd_core_q <= '0;
      hrd_addr_q <= '0;
    end else begin
      cfg_q      <= cfg;
      hrd_en_q   <= host_rd_en;
      hrd_core_q <= host_rd_core;
      hrd_addr_q <= host_rd_addr;
    end
  end

  logic  [NP-1:0]         xi_valid, xi_ready, xo_valid, xo_ready;
  flit_t [NP-1:0]         xi_flit, xo_flit;
  logic  [NP-1:0][PW-1:0] xi_dst;
  logic  [CLUSTER_SIZE-1:0] core_ok;
  logic  [CLUSTER_SIZE-1:0][1:0] core_phase;   // observed by testbenches
  logic  [CLUSTER_SIZE-1:0][WORD_W-1:0] core_rdata;

  for (genvar c = 0; c < CLUSTER_SIZE; c++) begin : g_core
    core_id_t id;
    assign id.cluster  = my_cluster;
    assign id.local_id = LOC_W'(c);
    ccss_core u_core (
      .clk, .rst_n, .core_id(id), .cfg(cfg_q),
      .start, .cycle_done, .barrier_ok(core_ok[c]), .phase_o(core_phase[c]),
      .host_rd_en(hrd_en_q), .host_rd_core(hrd_core_q), .host_rd_addr(hrd_addr_q),
      .host_rdata(core_rdata[c]),
      .inj_valid(xi_valid[c]), .inj_flit(xi_flit[c]), .inj_ready(xi_ready[c]),
      .ej_valid(xo_valid[c]), .ej_flit(xo_flit[c]), .ej_ready(xo_ready[c]));
    assign xi_dst[c] = (xi_flit[c].dest.cluster == my_cluster) ?
                       PW'(xi_flit[c].dest.local_id) : PW'(CLUSTER_SIZE);
  end

  ring_stop u_stop (
    .clk, .rst_n, .my_cluster,
    .ring_in_valid, .ring_in_flit, .ring_in_ready,
    .ring_out_valid, .ring_out_flit, .ring_out_ready,
    .inj_valid(xo_valid[CLUSTER_SIZE]), .inj_flit(xo_flit[CLUSTER_SIZE]),
    .inj_ready(xo_ready[CLUSTER_SIZE]),
    .ej_valid(xi_valid[CLUSTER_SIZE]), .ej_flit(xi_flit[CLUSTER_SIZE]),
    .ej_ready(xi_ready[CLUSTER_SIZE]));
  assign xi_dst[CLUSTER_SIZE] = PW'(xi_flit[CLUSTER_SIZE].dest.local_id);

  xbar #(.N_PORTS(NP)) u_xbar (
    .clk, .rst_n,
    .in_valid(xi_valid), .in_flit(xi_flit), .in_dst(xi_dst), .in_ready(xi_ready),
    .out_valid(xo_valid), .out_flit(xo_flit), .out_ready(xo_ready));

  logic [WORD_W-1:0] rdata_or;
  always_comb begin
    rdata_or = '0;
    for (int c = 0; c < CLUSTER_SIZE; c++) rdata_or |= core_rdata[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      barrier_ok <= 1'b0;
      host_rdata <= '0;
    end else begin
      barrier_ok <= &core_ok;
      host_rdata <= rdata_or;
    end
  end
endmodule
