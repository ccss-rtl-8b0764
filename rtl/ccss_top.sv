// ccss_top: the CCSS RTL-simulation accelerator.
//
// N_CLUSTER clusters of CLUSTER_SIZE cores (36 x 36 = 1296 cores by default,
// each with 5 time-multiplexed LUT4 units of 512 slots: 3.3 million LUT nodes
// per RTL cycle). Cluster i sends on the ring to cluster i+1 (mod N_CLUSTER).
// The host loads LUT programs, sync programs, data words and per-core control
// registers over `cfg` while the array is idle, starts `run_cycles` RTL cycles
// with a one-clock run_valid pulse, waits for busy to fall and reads words
// back (host_rdata is valid four clocks after host_rd_en). rtl_cycles counts
// finished RTL cycles and last_cycle_hw the clocks the latest one took.
//
// The core count, cluster/ring organisation and per-core resources follow
// the published 36x36 configuration. The host interface is this design's own.
module ccss_top
  import ccss_pkg::*;
#(
  parameter int N_CLUSTER    = DEF_N_CLUSTER,
  parameter int CLUSTER_SIZE = DEF_CLUSTER_SIZE
) (
  input  logic              clk,
  input  logic              rst_n,
  input  cfg_t              cfg,
  input  logic              host_rd_en,
  input  core_id_t          host_rd_core,
  input  logic [AW-1:0]     host_rd_addr,
  output logic [WORD_W-1:0] host_rdata,
  input  logic              run_valid,
  input  logic [31:0]       run_cycles,
  output logic              busy,
  output logic [31:0]       rtl_cycles,
  output logic [31:0]       last_cycle_hw
);
  logic  [N_CLUSTER-1:0] r_valid, r_ready, ok;
  flit_t [N_CLUSTER-1:0] r_flit;
  logic  [N_CLUSTER-1:0][WORD_W-1:0] cl_rdata;
  logic  start, cycle_done;

  // r_*[i] is the ring link leaving cluster i
  for (genvar i = 0; i < N_CLUSTER; i++) begin : g_cl
    localparam int PREV = (i + N_CLUSTER - 1) % N_CLUSTER;
    ccss_cluster #(.CLUSTER_SIZE(CLUSTER_SIZE)) u_cluster (
      .clk, .rst_n, .my_cluster(CL_W'(i)), .cfg,
      .start, .cycle_done, .barrier_ok(ok[i]),
      .host_rd_en, .host_rd_core, .host_rd_addr, .host_rdata(cl_rdata[i]),
      .ring_in_valid(r_valid[PREV]), .ring_in_flit(r_flit[PREV]), .ring_in_ready(r_ready[PREV]),
      .ring_out_valid(r_valid[i]), .ring_out_flit(r_flit[i]), .ring_out_ready(r_ready[i]));
  end

  sim_ctrl u_ctrl (
    .clk, .rst_n, .run_valid, .run_cycles, .all_ok(&ok),
    .start, .cycle_done, .busy, .rtl_cycles, .last_cycle_hw);

  logic [WORD_W-1:0] rdata_or;
  always_comb begin
    rdata_or = '0;
    for (int i = 0; i < N_CLUSTER; i++) rdata_or |= cl_rdata[i];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) host_rdata <= '0;
    else        host_rdata <= rdata_or;
  end
endmodule
