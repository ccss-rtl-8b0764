// ccss_pkg: sizes and types shared by the CCSS simulation accelerator.
//
// The accelerator evaluates a LUT4 netlist one RTL cycle at a time. Each core
// owns five time-multiplexed 4-input LUT units (512 instruction slots each) and
// a data memory made of four replicated 5-read/1-write SRAM banks with 32-bit
// words. After computing, a core gathers register vectors (up to 20 scattered
// bits per cycle) and sends them over a two-level network: a crossbar inside a
// cluster of 36 cores and a ring between 36 clusters.
//
// Numbers that come from the published description: 5 LUTs per core, 4 inputs
// per LUT, 512 instruction slots, 5R1W banks with 32-bit words, four banks,
// 36 cores per cluster, 36 clusters. Everything else here (memory depth,
// instruction and flit formats, sync program depth) is this design's choice.
package ccss_pkg;

  // ---- compute core ----
  localparam int N_LUT       = 5;               // LUT units per core
  localparam int LUT_K       = 4;               // inputs per LUT
  localparam int N_BANK      = LUT_K;           // one 5R1W bank per LUT input
  localparam int N_RP        = N_BANK * N_LUT;  // 20 read ports per core
  localparam int WORD_W      = 32;              // SRAM word width
  localparam int BIT_W       = $clog2(WORD_W);  // bit index inside a word
  localparam int DATA_DEPTH  = 256;             // words per bank
  localparam int AW          = $clog2(DATA_DEPTH);
  localparam int INSTR_DEPTH = 512;             // slots per LUT unit
  localparam int SLOT_W      = $clog2(INSTR_DEPTH) + 1; // counts 0..512
  localparam int RES_PER_WORD = WORD_W / N_LUT; // slots packed per result word (6)
  localparam int MIN_DEP_DIST = 2;              // producer->consumer slot distance

  // ---- synchronisation ----
  localparam int SYNC_DEPTH  = 64;              // register-vector sends per core
  localparam int SYNC_AW     = $clog2(SYNC_DEPTH) + 1; // counts 0..64
  localparam int VEC_W       = N_RP;            // bits gathered per cycle (20)
  localparam int LEN_W       = $clog2(VEC_W) + 1;
  localparam int RXC_W       = 16;              // received-flit counter

  // ---- network ----
  localparam int DEF_CLUSTER_SIZE = 36;   // cores per cluster
  localparam int DEF_N_CLUSTER    = 36;   // clusters on the ring
  localparam int LOC_W        = 6;
  localparam int CL_W         = 6;

  typedef struct packed {
    logic [AW-1:0]    addr;    // word address
    logic [BIT_W-1:0] bitsel;  // bit inside the word
  } operand_t;

  // One LUT instruction: truth table indexed by {in3,in2,in1,in0}.
  typedef struct packed {
    logic [15:0]              truth;
    operand_t [LUT_K-1:0]     op;
  } lut_instr_t;

  typedef struct packed {
    logic [CL_W-1:0]  cluster;
    logic [LOC_W-1:0] local_id;
  } core_id_t;

  // A register vector in flight: written at dest word waddr, bits [off +: len].
  typedef struct packed {
    core_id_t          dest;
    logic [AW-1:0]     waddr;
    logic [BIT_W-1:0]  off;
    logic [LEN_W-1:0]  len;
    logic [VEC_W-1:0]  data;
  } flit_t;

  // One sync instruction: read port p gathers bit p of the vector.
  typedef struct packed {
    operand_t [N_RP-1:0] op;
    core_id_t            dest;
    logic [AW-1:0]       waddr;
    logic [BIT_W-1:0]    off;
    logic [LEN_W-1:0]    len;
  } sync_instr_t;

  // ---- host load / control bus ----
  typedef enum logic [1:0] {
    CFG_LUT  = 2'd0,   // lut_instr_t into LUT unit `lut`, slot `addr`
    CFG_SYNC = 2'd1,   // sync_instr_t into slot `addr`
    CFG_DATA = 2'd2,   // 32-bit word into data memory word `addr`
    CFG_REG  = 2'd3    // control register `addr` (see REG_*)
  } cfg_sel_e;

  localparam int REG_COMP_LEN  = 0;  // compute slots per RTL cycle
  localparam int REG_SYNC_LEN  = 1;  // sync instructions per RTL cycle
  localparam int REG_RX_EXPECT = 2;  // flits this core receives per RTL cycle

  localparam int CFG_DW = $bits(sync_instr_t);

  typedef struct packed {
    logic              valid;
    core_id_t          core;
    cfg_sel_e          sel;
    logic [2:0]        lut;
    logic [9:0]        addr;
    logic [CFG_DW-1:0] data;
  } cfg_t;

  // Bit mask and aligned data for writing a vector of `len` bits at `off`.
  function automatic logic [WORD_W-1:0] vec_mask(logic [LEN_W-1:0] len, logic [BIT_W-1:0] off);
    logic [2*WORD_W-1:0] m;
    m = ((2*WORD_W)'(1) << len) - (2*WORD_W)'(1);
    return WORD_W'(m << off);
  endfunction

  function automatic logic [WORD_W-1:0] vec_data(logic [VEC_W-1:0] d, logic [LEN_W-1:0] len,
                                                 logic [BIT_W-1:0] off);
    logic [2*WORD_W-1:0] x;
    x = (2*WORD_W)'(d) << off;
    return WORD_W'(x) & vec_mask(len, off);
  endfunction

endpackage
