// ccss_tb_util.svh: program-building helpers shared by the core, cluster and
// top testbenches (included inside a testbench module that imports ccss_pkg).
//
// The reference program is a 4-bit binary counter held in data word Q_WORD,
// bits [3:0]. Slot 0: LUT j computes next-state bit j of the counter from the
// four current bits. Slot 1 is idle (a consumer must sit two slots after its
// producer). Slot 2: LUT 0 computes the parity of the four next-state bits.
// Slot results land in word 0: slot 0 in bits [4:0], slot 2 in bits [14:10].
// The truth tables are derived here from integer addition, independently of
// the hardware.

localparam int Q_WORD = 100;

function automatic logic [15:0] counter_truth(int j);
  logic [15:0] t;
  for (int i = 0; i < 16; i++) t[i] = ((i + 1) >> j) & 1;
  return t;
endfunction

function automatic logic [15:0] parity_truth();
  logic [15:0] t;
  for (int i = 0; i < 16; i++) t[i] = ^(4'(i));
  return t;
endfunction

function automatic operand_t opnd(int addr, int b);
  operand_t o;
  o.addr = AW'(addr); o.bitsel = BIT_W'(b);
  return o;
endfunction

function automatic lut_instr_t lut_instr(logic [15:0] truth, operand_t o0, operand_t o1,
                                         operand_t o2, operand_t o3);
  lut_instr_t li;
  li.truth = truth;
  li.op[0] = o0; li.op[1] = o1; li.op[2] = o2; li.op[3] = o3;
  return li;
endfunction

// Counter program instruction for LUT unit j at slot s.
function automatic lut_instr_t counter_prog(int s, int j);
  if (s == 0 && j < 4)
    return lut_instr(counter_truth(j), opnd(Q_WORD,0), opnd(Q_WORD,1), opnd(Q_WORD,2), opnd(Q_WORD,3));
  if (s == 2 && j == 0)
    return lut_instr(parity_truth(), opnd(0,0), opnd(0,1), opnd(0,2), opnd(0,3));
  return lut_instr(16'h0, opnd(0,0), opnd(0,0), opnd(0,0), opnd(0,0));
endfunction

// Sync instruction gathering `len` bits from the listed (word, bit) pairs.
function automatic sync_instr_t sync_instr(core_id_t dest, int waddr, int off, int len,
                                           int words[VEC_W], int bits[VEC_W]);
  sync_instr_t si;
  si = '0;
  for (int p = 0; p < VEC_W; p++) si.op[p] = opnd(words[p], bits[p]);
  si.dest = dest; si.waddr = AW'(waddr); si.off = BIT_W'(off); si.len = LEN_W'(len);
  return si;
endfunction

// Counter state d[3:0] and parity: word 0 bits 0..3 and 10.
function automatic sync_instr_t counter_sync(core_id_t dest, int waddr, int off, int len);
  int w[VEC_W], b[VEC_W];
  for (int p = 0; p < VEC_W; p++) begin w[p] = 0; b[p] = 0; end
  b[0] = 0; b[1] = 1; b[2] = 2; b[3] = 3; b[4] = 10;
  return sync_instr(dest, waddr, off, len, w, b);
endfunction

function automatic core_id_t cid(int cl, int loc);
  core_id_t c;
  c.cluster = CL_W'(cl); c.local_id = LOC_W'(loc);
  return c;
endfunction

function automatic cfg_t mk_cfg(core_id_t core, cfg_sel_e sel, int lut, int addr,
                                logic [CFG_DW-1:0] data);
  cfg_t c;
  c.valid = 1'b1; c.core = core; c.sel = sel; c.lut = 3'(lut); c.addr = 10'(addr); c.data = data;
  return c;
endfunction
