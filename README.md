# CCSS — a LUT-based multi-core accelerator for full-cycle RTL simulation

CCSS simulates a digital design cycle by cycle. The design under simulation is
first mapped to a netlist of 4-input look-up tables (LUT4) and flip-flops. The
accelerator then evaluates the whole netlist once per simulated clock ("RTL
cycle"). That is the full-cycle style: no event queue, every node every
cycle, so the work is regular and parallel.

Two ideas carry the design.

* **Combinational logic on time-multiplexed LUTs that talk through memory.**
  An FPGA gives every LUT its own piece of silicon and wires LUTs together.
  A CCSS core instead has five physical LUT units. Each unit steps through up
  to 512 instructions per RTL cycle, and each instruction is one LUT node of
  the netlist. LUTs pass values to each other only by writing and reading a
  small multi-port SRAM inside the core. There is no routing, so the clock can
  be high. The published design targets 1.5 GHz in 28 nm.
* **Sequential logic synchronised by a two-level network.** The netlist is
  partitioned into "fibers": the logic cone behind each register vector. Each
  core therefore computes its share of a cycle without talking to other
  cores. Only after computing do cores exchange the new register values. The
  read circuitry that fed the LUTs is reused to collect a register vector's
  scattered bits in one clock. The vector then goes either into the core's
  own memory or out on the network. Cores are grouped in clusters of 36 with a
  crossbar inside each cluster, and the 36 clusters sit on a ring.

This repository holds synthesizable SystemVerilog for the accelerator array
(cores, memories, network, run controller) in its main configuration of
36 × 36 = 1296 cores. Each core has 5 LUT units × 512 slots, so the array
holds 3.3 million LUT nodes. It also has self-checking testbenches for every
block. The netlist compiler (LUT mapping, fiber partitioning, scheduling) is
software and is not included. The testbenches hand-assemble small programs.

## Hierarchy

| module | what it is |
|---|---|
| `ccss_top` | 36 clusters on a unidirectional ring, the run controller, the host bus |
| `sim_ctrl` | runs N RTL cycles: start all cores, global barrier, release |
| `ccss_cluster` | 36 cores + one 37-port crossbar + one ring stop |
| `xbar` | crossbar, round-robin per output (`rr_arb`), one register per output |
| `ring_stop` | two-flit queue towards the next cluster, ejection register |
| `ccss_core` | 5 × `lut_unit`, one `mem_access`, one `sync_engine`, phase controller |
| `lut_unit` | 512-deep instruction memory + LUT4 evaluation |
| `mem_access` | 4 × `sram_5r1w` (20 read ports, bit-select per port, one shared write port) |
| `sram_5r1w` | 256 × 32-bit bank, 5 synchronous read ports, 1 bit-masked write port |
| `sync_engine` | sync program, 20-bit register-vector gather, send queue, local path, receive |
| `ccss_pkg` | sizes, instruction/flit/config structs, helper functions |

## One RTL cycle

1. `sim_ctrl` pulses `start` to every core.
2. **Compute.** Each core issues slots `0 … comp_len-1`, one per clock.
   All five LUT units execute their instruction for that slot in parallel.
3. **Sync.** When a core's compute pipeline has drained, its sync engine runs
   `sync_len` sync instructions. Each one gathers one register vector and
   sends it to the vector's destination. Starting at this point, and not
   before, the core also accepts flits that other cores send to it.
4. A core raises `barrier_ok` once all its vectors are sent and it has
   received `rx_expect` flits.
5. The AND of all `barrier_ok` reaches `sim_ctrl` through two register
   stages (one in the cluster, one in the controller). The controller then
   pulses `cycle_done`, and every core returns to idle. If more RTL cycles
   were requested, the next `start` follows one clock later.

Cores in different states of the same cycle are safe with respect to each
other. A flit can only overwrite register state that the receiver reads in
the *next* cycle. The receiver also holds incoming flits back (`ej_ready` = 0)
until its own computation is done. So a fast core can never change a value
that a slow core is still reading. Flits that are held back wait in the
network, which always drains because every core finishes computing on its own.

## The compute pipeline and the memory layout

### Data memory

Each core has four banks of 256 × 32-bit words with five read ports each,
which gives 20 read ports in total. Read port `p = k*5 + j` is bank `k`, port
`j`. During computation it feeds input `k` of LUT unit `j`. A write goes to all
four banks at once, so the banks always hold the same data. This is how any
LUT input can read any bit while each bank still has only one write port.
Every read port carries an operand `{addr[7:0], bitsel[4:0]}`. The word is
read at a clock edge, and a 32:1 multiplexer returns the addressed bit in the
next cycle.

The 256 words are shared by convention; the hardware does not enforce a
split.

* **Slot results.** Slot `t` writes its five LUT outputs to word `t / 6`,
  bits `5*(t % 6) +: 5`. LUT `j` goes to bit `5*(t%6) + j`. A full 512-slot
  program fills words 0–85. The write counters restart at every RTL cycle.
* **Register state and anything else.** Words 86–255 (5440 bits) hold the
  current values of registers and primary inputs. They are written by the
  host or by synchronisation, and read by LUTs in the following cycle.

### LUT instruction (`lut_instr_t`, 68 bits)

`{truth[15:0], op[3], op[2], op[1], op[0]}`. Each `op` is a 13-bit operand.
The output is `truth[{in3,in2,in1,in0}]`.

### Timing and the dependency rule

For a slot fetched at clock edge E0:

| clock | what happens |
|---|---|
| E0 | instruction read from the 512-deep instruction memory |
| E1 | 4 operand words read from the banks (all 5 LUTs: 20 reads) |
| E2 | bits selected, LUT evaluated, 5 results written (masked) |

A new slot starts every clock, so one slot's memory reads overlap the
previous slot's evaluation. Reads happen before writes at the same edge.
Slot `t` writes at edge `t+2` and slot `u` reads at edge `u+1`, so **a
consumer must be at least 2 slots after its producer** (`MIN_DEP_DIST`).
There is no interlock. The scheduler places nodes layer by layer in
topological order, five nodes per slot, and pads with idle slots where a
layer is too short. Idle slots cost time, not correctness. A compute phase of
`comp_len` slots occupies the core for `comp_len + 3` clocks.

## Synchronisation

### Sync instruction (`sync_instr_t`, 290 bits)

`{op[19:0], dest, waddr, off, len}`. Port `p` reads bit `p` of the vector,
and `len` (1–20) bits are used. The vector is written at the destination core
into word `waddr`, bits `off +: len`. The write is masked, so the rest of the
word keeps its contents. A register wider than 20 bits takes several
instructions.

The pipeline is the same as for compute: instruction at E0, gather at E1,
and at E2 the flit `{dest, waddr, off, len, data[19:0]}` (51 bits) enters a
4-entry send queue. Issue stops while the queue plus the vectors still in the
pipeline could overfill it, so the queue never overflows. At the queue head,
a flit addressed to the core itself takes the **local path** into the core's
write port. Any other flit goes to the network. Incoming flits win the write
port over local ones. The published design orders remote vectors first, so
that local writes overlap network transit. Here that order is left to the
sync program: put the remote vectors first.

### Completion

The hardware does not know who sends to whom. Each core is told how many
flits it will receive per RTL cycle (`rx_expect`). The compiler knows this
count because the partition is static.

## The network

* **Crossbar (per cluster).** There are 37 ports: 36 cores plus the ring
  stop. A core's flit goes to `dest.local_id` if `dest.cluster` is this
  cluster, and to the ring port otherwise. Each output has a round-robin
  arbiter and a one-flit register, so a flit needs one clock from a core's
  send queue to the destination's ejection port. Several inputs can win
  different outputs in the same clock.
* **Ring (between clusters).** The ring is unidirectional: cluster `i` sends
  to cluster `i+1 mod 36`, one clock per hop. Each stop has a two-flit queue
  towards the next stop. Flits already on the ring have priority over new
  ones. A new flit is accepted only when the stop's queue is empty. This
  bubble rule keeps a free slot on the ring, so it cannot deadlock. A flit
  that arrives at its destination cluster goes through an ejection register
  into the crossbar's ring port. The worst case is 35 hops.

End-to-end latency for a lone flit, counted from the send queue: 1 clock
inside a cluster. Between clusters it is 1 (crossbar) + hops + 1 (ejection)
+ 1 (crossbar).

## Host interface and programming

While the array is idle, the host writes through `cfg` (`cfg_t`). Its fields
are `valid`, the target core id `{cluster, local}`, `sel` and `addr`:

| `sel` | writes |
|---|---|
| `CFG_LUT` | `lut_instr_t` into LUT unit `lut`, slot `addr` |
| `CFG_SYNC` | `sync_instr_t` into sync slot `addr` (0–63) |
| `CFG_DATA` | a full 32-bit word into data word `addr` (initial state, stimulus) |
| `CFG_REG` | `addr` 0: `comp_len` (0–512), 1: `sync_len` (0–64), 2: `rx_expect` |

Control registers reset to 0. A core that is never programmed computes
nothing, sends nothing and expects nothing. Its instruction memories need no
clearing. Pulse `run_valid` with `run_cycles` to run; `busy` stays high until
all cycles are done. `rtl_cycles` counts finished RTL cycles, and
`last_cycle_hw` gives the clocks the last one took. A read-back of core `c`,
word `a` is requested with `host_rd_en`, `host_rd_core`, `host_rd_addr`, and
the data appears on `host_rdata` four clocks later. Only an idle core answers;
all others return 0 and the results are OR-combined.

Example: the testbenches' counter (`tb/ccss_tb_util.svh`). It is a 4-bit
register in word 100, bits 3:0. Slot 0, LUT `j` computes next-state bit `j`
from the four current bits. Slot 1 is idle because of the dependency rule.
Slot 2, LUT 0 computes the parity of slot 0's outputs (word 0, bits 0–3).
One sync instruction gathers word 0 bits {0,1,2,3} and writes them to word
100 bits 3:0 of the same core. Other sync instructions send the same bits to
other cores.

## Sizes

| quantity | value here | source |
|---|---|---|
| LUT units per core, LUT inputs | 5, 4 | published |
| instruction slots per LUT | 512 | published |
| banks × read ports, word width | 4 × 5R1W, 32 bit | published |
| cores per cluster, clusters | 36, 36 (ring of clusters) | published |
| data words per bank | 256 | this design |
| sync instructions per core | 64 | this design |
| send queue, ring queue | 4, 2 flits | this design |

The published on-chip SRAM total is 32.59 MiB for 1296 cores, which is
210,950 bits per core. The 256-word depth was chosen to fit that budget.
LUT instructions take 5 × 512 × 68 = 174,080 bits and the data banks
4 × 256 × 32 = 32,768 bits, for 206,848 bits in total. The sync program memory
(64 × 290 bits) comes on top.

## Departures from the published design, and choices it leaves open

* The 5R1W SRAM is a custom macro in the original. Here it is a plain array
  with the same ports. It simulates and synthesises, but as flip-flops. It
  gives the same function, not the same area or speed.
* All formats are this design's own: instructions, flits, the configuration
  bus, the result-packing rule, the 256-word depth and the sync program
  depth. The original has four 5R1W SRAMs feeding the five LUTs. Keeping the same
  data in all four, as replicas, is this design's choice. So are the read-before-write rule and
  the two-clock dependency distance.
* The barrier is a global AND with a received-flit count per core. The
  original states only that all cores must synchronise before the next cycle.
* The crossbar uses round-robin arbitration. The ring is unidirectional with
  the bubble rule.
* Netlist block RAMs are mapped to "hardware BRAM" in the original. That
  block is not specified there and is not built here. Netlists with memories
  would need it.
* The compiler is not part of this RTL. That covers Yosys LUT mapping, fiber
  splitting and hill-climbing merging, layered scheduling and METIS
  clustering of cores.

## Verification

Every module has a self-checking testbench in `tb/`. Each testbench prints
`TB_RESULT checks=N failures=M` and stops itself through a watchdog if
something hangs.

| testbench | checks |
|---|---|
| `tb_sram_5r1w` | random masked writes, 5 reads/clock, read-before-write on collision |
| `tb_mem_access` | all 20 bit-select ports against a reference, masked write, word read-back |
| `tb_lut_unit` | 512 random instructions streamed at one per clock, operand and result timing |
| `tb_sync_engine` | random sync programs; remote flits, local writes, received-flit priority and hold-off, `done` |
| `tb_ccss_core` | counter program over 20 RTL cycles; compute phase = `comp_len+3` clocks; back-pressure |
| `tb_xbar` | random traffic with back-pressure; routing, per-pair order, no loss, 1-clock latency |
| `tb_ring_stop` | 4-stop ring under load; delivery, order, no deadlock, 1 clock/hop |
| `tb_ccss_cluster` | 4-core cluster: crossbar, ring out/in, barrier, host read |
| `tb_sim_ctrl` | run control against a model array with random latency |
| `tb_ccss_top` | 3 × 4 cores end to end; counts every mechanism (compute, gather, local path, crossbar, ring hops, arbitration, hold-off, barrier) |
| `tb_ccss_netlist` | a random synchronous netlist (48 flip-flops, 480 LUT4 nodes) compiled by the testbench itself — fiber partition onto 2 × 3 cores, list scheduling under the two-slot rule, broadcast sync programs — and 12 RTL cycles compared bit for bit with a software evaluation of the netlist on every core |
| `tb_ccss_top_ring` | the same test with the ring at full length: 36 clusters of 4 cores; one flit crosses 35 ring hops |
| `tb_ccss_top_wide` | the same test with clusters at full width: 2 clusters of 36 cores, 37-port crossbars |

To run one with Verilator:

```
verilator --binary --timing --assert -Irtl -Itb -y rtl -y tb +libext+.sv \
    --top-module tb_ccss_top rtl/ccss_pkg.sv tb/tb_ccss_top.sv
./obj_dir/Vtb_ccss_top
```

The full 36 × 36 array (1296 cores) lints and elaborates, but Verilator
generates a separate C++ model for each cluster instance. At that size the
C++ build takes far longer than the test itself, so no testbench runs the
default configuration. The largest configurations simulated are 36
clusters × 4 cores (the full ring) and 2 clusters × 36 cores (full
clusters), which together cover every full-size structure.
