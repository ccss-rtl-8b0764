// sim_ctrl: runs the accelerator for a requested number of RTL cycles.
//
// Full-cycle simulation evaluates the whole netlist every RTL cycle, then
// synchronises register state between cores before the next cycle may start.
// This controller implements that bulk-synchronous loop: on run_valid it
// latches run_cycles, pulses `start` to every core, waits until the
// (registered) AND of all cores' barrier flags is high, pulses `cycle_done`
// to release them, and repeats. Because the barrier AND arrives through
// SETTLE clocks of pipeline registers, it is ignored for SETTLE clocks after
// each start. It counts finished RTL cycles and the clocks the last one took.
//
// The two-phase, globally synchronised RTL cycle follows the published
// design; the global AND barrier and the counters are this design's choices.
module sim_ctrl #(
  parameter int SETTLE = 4
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        run_valid,
  input  logic [31:0] run_cycles,
  input  logic        all_ok,
  output logic        start,
  output logic        cycle_done,
  output logic        busy,
  output logic [31:0] rtl_cycles,
  output logic [31:0] last_cycle_hw
);
  typedef enum logic [1:0] {S_IDLE, S_START, S_RUN} state_e;
  state_e      state;
  logic [31:0] remaining, hw_cnt;
  logic [7:0]  settle;
  logic        ok_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; remaining <= '0; hw_cnt <= '0; settle <= '0; ok_q <= 1'b0;
      start <= 1'b0; cycle_done <= 1'b0; rtl_cycles <= '0; last_cycle_hw <= '0;
    end else begin
      ok_q       <= all_ok;
      start      <= 1'b0;
      cycle_done <= 1'b0;
      unique case (state)
        S_IDLE: if (run_valid && run_cycles != 0) begin
          remaining <= run_cycles;
          state     <= S_START;
        end
        S_START: begin
          start  <= 1'b1;
          hw_cnt <= 32'd1;
          settle <= '0;
          state  <= S_RUN;
        end
        S_RUN: begin
          hw_cnt <= hw_cnt + 1;
          if (32'(settle) < SETTLE) settle <= settle + 1'b1;
          else if (ok_q) begin
            cycle_done    <= 1'b1;
            last_cycle_hw <= hw_cnt;
            rtl_cycles    <= rtl_cycles + 1;
            remaining     <= remaining - 1;
            state         <= (remaining == 32'd1) ? S_IDLE : S_START;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
endmodule
