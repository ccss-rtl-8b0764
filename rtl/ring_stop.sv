// ring_stop: one stop of the unidirectional inter-cluster ring.
//
// A flit arriving on ring_in is ejected towards the cluster crossbar if its
// destination cluster is this one, otherwise it is queued for the next stop.
// The cluster injects outbound flits on inj. The outbound queue holds two
// flits. Flits already on the ring have priority. A new flit is injected only
// into an empty queue (bubble rule), so the ring always keeps a free slot and
// cannot deadlock. ring_in_ready depends only on registered state and the
// incoming flit, so the ring has no combinational loop. One clock per hop.
//
// A ring between clusters follows the published design; direction, buffer
// depth and the bubble rule are this design's choices.
module ring_stop
  import ccss_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic [CL_W-1:0] my_cluster,
  input  logic            ring_in_valid,
  input  flit_t           ring_in_flit,
  output logic            ring_in_ready,
  output logic            ring_out_valid,
  output flit_t           ring_out_flit,
  input  logic            ring_out_ready,
  input  logic            inj_valid,
  input  flit_t           inj_flit,
  output logic            inj_ready,
  output logic            ej_valid,
  output flit_t           ej_flit,
  input  logic            ej_ready
);
  flit_t       q [2];
  logic        q_rd, q_wr;
  logic [1:0]  q_cnt;
  logic        here, ej_can, pass, push_inj, push, pop;
  flit_t       push_flit;

  assign here    = ring_in_flit.dest.cluster == my_cluster;
  assign ej_can  = !ej_valid || ej_ready;
  assign ring_in_ready = here ? ej_can : (q_cnt != 2'd2);
  assign pass    = ring_in_valid && !here && (q_cnt != 2'd2);
  assign inj_ready = (q_cnt == 2'd0) && !(ring_in_valid && !here);
  assign push_inj  = inj_valid && inj_ready;
  assign push      = pass || push_inj;
  assign push_flit = pass ? ring_in_flit : inj_flit;

  assign ring_out_valid = (q_cnt != 2'd0);
  assign ring_out_flit  = q[q_rd];
  assign pop            = ring_out_valid && ring_out_ready;

  always_ff @(posedge clk) begin
    if (push) q[q_wr] <= push_flit;
    if (ring_in_valid && here && ej_can) ej_flit <= ring_in_flit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_rd <= 1'b0; q_wr <= 1'b0; q_cnt <= '0; ej_valid <= 1'b0;
    end else begin
      if (push) q_wr <= ~q_wr;
      if (pop)  q_rd <= ~q_rd;
      q_cnt <= q_cnt + 2'(push) - 2'(pop);
      if (ej_can) ej_valid <= ring_in_valid && here;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(pass && inj_valid && inj_ready));
endmodule
