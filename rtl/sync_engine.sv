// sync_engine: sequential-logic synchronisation for one core.
//
// After the core has computed an RTL cycle, the next-state bits of its
// registers lie scattered over the data memory. The engine runs a small sync
// program (sync_len instructions). Each instruction names 20 operands, one per
// read port of the memory access circuit, so a whole register vector of up to
// 20 bits is gathered in a single cycle, plus the destination core, word,
// bit offset and length. Pipeline for an instruction issued at edge E0:
//   E0: instruction read from the sync memory;
//   E1: the 20 operands are read from the data memory;
//   E2: the gathered vector, packed into a flit, enters the send queue.
// The queue head leaves through the NoC injection port when the destination
// is another core, or through the local path (this core's write port) when it
// is this core. Flits arriving from the NoC are written into the data memory
// and counted; they have priority over local writes. Issue is throttled so
// that the queue can never overflow. done rises once everything is sent and
// rx_expect flits have arrived.
//
// Reusing the LUT read ports for gathering, sending remote vectors before
// local ones and a local short-cut path follow the published design. The
// instruction format, the flit format, the queue depth, the received-flit
// count and accepting NoC flits only while accept_en is high (i.e. after this
// core has finished computing) are this design's choices.
module sync_engine
  import ccss_pkg::*;
#(
  parameter int DEPTH  = SYNC_DEPTH,
  parameter int QDEPTH = 4,
  localparam int IAW   = $clog2(DEPTH),
  localparam int CW    = $clog2(DEPTH) + 1,
  localparam int QAW   = $clog2(QDEPTH)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  core_id_t             my_id,
  // program load
  input  logic                 cfg_we,
  input  logic [IAW-1:0]       cfg_addr,
  input  sync_instr_t          cfg_instr,
  input  logic [CW-1:0]        sync_len,
  input  logic [RXC_W-1:0]     rx_expect,
  // phase control
  input  logic                 start,
  input  logic                 accept_en,
  output logic                 done,
  // gather through the memory access circuit
  output operand_t [N_RP-1:0]  rd_req,
  input  logic [N_RP-1:0]      rd_bit,
  // NoC
  output logic                 inj_valid,
  output flit_t                inj_flit,
  input  logic                 inj_ready,
  input  logic                 ej_valid,
  input  flit_t                ej_flit,
  output logic                 ej_ready,
  // write port request
  output logic                 wr_en,
  output logic [AW-1:0]        wr_addr,
  output logic [WORD_W-1:0]    wr_data,
  output logic [WORD_W-1:0]    wr_mask
);
  sync_instr_t imem [DEPTH];
  sync_instr_t instr_q;
  flit_t       hdr_q;
  logic        active, s1, s2;
  logic [CW-1:0]    pc;
  logic [RXC_W-1:0] rx_cnt;

  flit_t            q [QDEPTH];
  logic [QAW-1:0]   q_rd, q_wr;
  logic [QAW:0]     q_cnt;
  logic             q_empty, head_local, push, pop, issue, ej_take, loc_take;
  flit_t            head, gathered;

  assign q_empty    = (q_cnt == 0);
  assign head       = q[q_rd];
  assign head_local = (head.dest == my_id);
  assign issue      = active && (pc < sync_len) &&
                      ((32'(q_cnt) + 32'(s1) + 32'(s2)) < QDEPTH);

  assign rd_req = instr_q.op;

  always_comb begin
    gathered      = hdr_q;
    gathered.data = rd_bit;
  end

  assign inj_valid = !q_empty && !head_local;
  assign inj_flit  = head;
  assign ej_ready  = accept_en;
  assign ej_take   = ej_valid && ej_ready;
  assign loc_take  = !q_empty && head_local && !ej_take;
  assign push      = s2;
  assign pop       = (inj_valid && inj_ready) || loc_take;

  always_comb begin
    wr_en   = ej_take || loc_take;
    if (ej_take) begin
      wr_addr = ej_flit.waddr;
      wr_data = vec_data(ej_flit.data, ej_flit.len, ej_flit.off);
      wr_mask = vec_mask(ej_flit.len, ej_flit.off);
    end else begin
      wr_addr = head.waddr;
      wr_data = vec_data(head.data, head.len, head.off);
      wr_mask = vec_mask(head.len, head.off);
    end
  end

  always_ff @(posedge clk) begin
    if (cfg_we) imem[cfg_addr] <= cfg_instr;
    if (issue) instr_q <= imem[IAW'(pc)];
    if (s1) begin
      hdr_q       <= '0;
      hdr_q.dest  <= instr_q.dest;
      hdr_q.waddr <= instr_q.waddr;
      hdr_q.off   <= instr_q.off;
      hdr_q.len   <= instr_q.len;
    end
    if (push) q[q_wr] <= gathered;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; s1 <= 1'b0; s2 <= 1'b0;
      pc <= '0; rx_cnt <= '0;
      q_rd <= '0; q_wr <= '0; q_cnt <= '0;
    end else begin
      s1 <= issue;
      s2 <= s1;
      if (start) begin
        active <= 1'b1;
        pc     <= '0;
        rx_cnt <= RXC_W'(ej_take);
      end else begin
        if (issue)   pc <= pc + 1'b1;
        if (ej_take) rx_cnt <= rx_cnt + 1'b1;
      end
      if (push) q_wr <= (32'(q_wr) == QDEPTH-1) ? '0 : q_wr + 1'b1;
      if (pop)  q_rd <= (32'(q_rd) == QDEPTH-1) ? '0 : q_rd + 1'b1;
      q_cnt <= q_cnt + (QAW+1)'(push) - (QAW+1)'(pop);
    end
  end

  assign done = active && (pc == sync_len) && !s1 && !s2 && q_empty && (rx_cnt == rx_expect);

  // The queue never overflows or underflows.
  assert property (@(posedge clk) disable iff (!rst_n) !(push && !pop && 32'(q_cnt) == QDEPTH));
  assert property (@(posedge clk) disable iff (!rst_n) !(pop && q_empty));
endmodule
