// ccss_core: one computing core of the accelerator.
//
// A core evaluates its share of the simulated netlist once per RTL cycle in
// two phases.
//  * Compute: slots 0..comp_len-1 are issued one per clock. In every slot the
//    five LUT units each evaluate one LUT node; their five results are packed
//    into 5 bits of a data word (slot t lands in word t/6, bits 5*(t%6) +: 5)
//    and written through the single write port. Fetch, memory read and LUT
//    evaluation are pipelined: a slot's result is written two cycles after it
//    is fetched, so a consumer must sit at least MIN_DEP_DIST (2) slots after
//    its producer. The program (layered topological order, idle slots where
//    needed) guarantees this; there is no hardware interlock.
//  * Sync: the sync engine gathers next-state register vectors through the
//    same 20 read ports and sends them to their owners. Flits from other cores
//    are written into this core's memory (register state words).
// barrier_ok rises when both phases are finished and every expected flit has
// arrived; the global cycle_done pulse returns the core to idle. While idle
// the host may load programs and data and read words back (read data one
// cycle after the request, zero when this core is not addressed).
//
// Five LUTs per core, 512 slots, shared-SRAM communication between LUTs and
// reuse of the read circuitry for synchronisation follow the published
// design. The packing of results, the phase controller, the host bus and the
// control registers are this design's choices.
module ccss_core
  import ccss_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  core_id_t          core_id,
  input  cfg_t              cfg,
  input  logic              start,
  input  logic              cycle_done,
  output logic              barrier_ok,
  output logic [1:0]        phase_o,
  input  logic              host_rd_en,
  input  core_id_t          host_rd_core,
  input  logic [AW-1:0]     host_rd_addr,
  output logic [WORD_W-1:0] host_rdata,
  output logic              inj_valid,
  output flit_t             inj_flit,
  input  logic              inj_ready,
  input  logic              ej_valid,
  input  flit_t             ej_flit,
  output logic              ej_ready
);
  localparam int IAW = $clog2(INSTR_DEPTH);
  typedef enum logic [1:0] {PH_IDLE = 2'd0, PH_COMPUTE = 2'd1, PH_SYNC = 2'd2} phase_e;

  phase_e phase;
  logic [SLOT_W-1:0]  comp_len, pc;
  logic [SYNC_AW-1:0] sync_len;
  logic [RXC_W-1:0]   rx_expect;
  logic v1, v2, fetch_en, comp_done, eng_start, eng_done, host_q;
  logic [AW-1:0]  wword;
  logic [2:0]     wlane;
  logic [N_LUT-1:0] lut_res;

  // configuration decode
  logic cfg_me;
  assign cfg_me = cfg.valid && (cfg.core == core_id);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      comp_len <= '0; sync_len <= '0; rx_expect <= '0;
    end else if (cfg_me && cfg.sel == CFG_REG) begin
      case (cfg.addr)
        10'(REG_COMP_LEN):  comp_len  <= SLOT_W'(cfg.data);
        10'(REG_SYNC_LEN):  sync_len  <= SYNC_AW'(cfg.data);
        10'(REG_RX_EXPECT): rx_expect <= RXC_W'(cfg.data);
        default: ;
      endcase
    end
  end

  // LUT units
  operand_t [N_LUT-1:0][LUT_K-1:0] lut_req;
  operand_t [N_RP-1:0] rd_req, eng_req;
  logic [N_RP-1:0]     rd_bit;
  logic [WORD_W-1:0]   rd_word0;

  assign fetch_en = (phase == PH_COMPUTE) && (pc < comp_len);

  for (genvar j = 0; j < N_LUT; j++) begin : g_lut
    logic [LUT_K-1:0] bits;
    for (genvar k = 0; k < LUT_K; k++) begin : g_in
      assign bits[k] = rd_bit[k*N_LUT + j];
    end
    lut_unit #(.DEPTH(INSTR_DEPTH)) u_lut (
      .clk,
      .cfg_we    (cfg_me && cfg.sel == CFG_LUT && cfg.lut == 3'(j)),
      .cfg_addr  (IAW'(cfg.addr)),
      .cfg_instr (lut_instr_t'(cfg.data[$bits(lut_instr_t)-1:0])),
      .fetch_en,
      .fetch_slot(IAW'(pc)),
      .rd_req    (lut_req[j]),
      .rd_bit    (bits),
      .lut_out   (lut_res[j]));
  end

  // read-port source: LUTs while computing, sync engine while syncing,
  // host read on port 0 while idle
  always_comb begin
    for (int k = 0; k < LUT_K; k++)
      for (int j = 0; j < N_LUT; j++)
        rd_req[k*N_LUT + j] = lut_req[j][k];
    if (phase == PH_SYNC) rd_req = eng_req;
    else if (phase == PH_IDLE) begin
      rd_req[0].addr   = host_rd_addr;
      rd_req[0].bitsel = '0;
    end
  end

  // write port
  logic                 eng_wr_en, we;
  logic [AW-1:0]        eng_wr_addr, wr_addr;
  logic [WORD_W-1:0]    eng_wr_data, eng_wr_mask, wr_data, wr_mask;

  always_comb begin
    we = 1'b0; wr_addr = '0; wr_data = '0; wr_mask = '0;
    unique case (phase)
      PH_COMPUTE: begin
        we      = v2;
        wr_addr = wword;
        wr_data = WORD_W'({27'b0, lut_res} << (N_LUT * wlane));
        wr_mask = WORD_W'({27'b0, {N_LUT{1'b1}}} << (N_LUT * wlane));
      end
      PH_SYNC: begin
        we = eng_wr_en; wr_addr = eng_wr_addr; wr_data = eng_wr_data; wr_mask = eng_wr_mask;
      end
      default: begin
        we      = cfg_me && cfg.sel == CFG_DATA;
        wr_addr = AW'(cfg.addr);
        wr_data = cfg.data[WORD_W-1:0];
        wr_mask = '1;
      end
    endcase
  end

  mem_access #(.DEPTH(DATA_DEPTH)) u_mem (
    .clk, .rd_req, .rd_bit, .rd_word0,
    .we, .wr_addr, .wr_data, .wr_mask);

  sync_engine #(.DEPTH(SYNC_DEPTH)) u_sync (
    .clk, .rst_n, .my_id(core_id),
    .cfg_we   (cfg_me && cfg.sel == CFG_SYNC),
    .cfg_addr ($clog2(SYNC_DEPTH)'(cfg.addr)),
    .cfg_instr(sync_instr_t'(cfg.data)),
    .sync_len, .rx_expect,
    .start    (eng_start),
    .accept_en(phase == PH_SYNC),
    .done     (eng_done),
    .rd_req   (eng_req), .rd_bit,
    .inj_valid, .inj_flit, .inj_ready,
    .ej_valid, .ej_flit, .ej_ready,
    .wr_en(eng_wr_en), .wr_addr(eng_wr_addr), .wr_data(eng_wr_data), .wr_mask(eng_wr_mask));

  // phase controller
  assign comp_done = (phase == PH_COMPUTE) && !fetch_en && !v1 && !v2;
  assign eng_start = comp_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase <= PH_IDLE; pc <= '0; v1 <= 1'b0; v2 <= 1'b0;
      wword <= '0; wlane <= '0; host_q <= 1'b0;
    end else begin
      v1 <= fetch_en;
      v2 <= v1;
      host_q <= host_rd_en && (host_rd_core == core_id) && (phase == PH_IDLE);
      if (fetch_en) pc <= pc + 1'b1;
      if (phase == PH_COMPUTE && v2) begin
        if (32'(wlane) == RES_PER_WORD-1) begin
          wlane <= '0;
          wword <= wword + 1'b1;
        end else wlane <= wlane + 1'b1;
      end
      unique case (phase)
        PH_IDLE:    if (start) begin
                      phase <= PH_COMPUTE; pc <= '0; wword <= '0; wlane <= '0;
                    end
        PH_COMPUTE: if (comp_done) phase <= PH_SYNC;
        PH_SYNC:    if (cycle_done) phase <= PH_IDLE;
        default:    phase <= PH_IDLE;
      endcase
    end
  end

  assign barrier_ok = (phase == PH_SYNC) && eng_done;
  assign phase_o    = phase;
  assign host_rdata = host_q ? rd_word0 : '0;
endmodule
