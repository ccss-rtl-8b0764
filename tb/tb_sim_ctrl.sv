// tb_sim_ctrl: self-checking test of the RTL-cycle run controller.
//
// A model array answers each `start` by raising its barrier flag after a
// random number of clocks, seen through two register stages as in the real
// array. The test checks that the controller issues exactly run_cycles
// starts, never releases the barrier (cycle_done) before the flag of the
// current cycle has risen, counts finished RTL cycles, reports the clocks of
// the last cycle exactly, and drops busy at the end.
module tb_sim_ctrl;
  logic clk = 0, rst_n = 0;
  logic run_valid; logic [31:0] run_cycles;
  logic all_ok, start, cycle_done, busy;
  logic [31:0] rtl_cycles, last_cycle_hw;

  sim_ctrl dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_start = 0, n_done = 0, lat, cnt, t_start;
  logic model_ok, ok_s1;
  logic armed;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // array model: flag rises `lat` clocks after start, falls on cycle_done
  int now = 0;
  always_ff @(posedge clk) begin
    now <= now + 1;
    if (start && rst_n) begin
      model_ok <= 1'b0; cnt <= 0; armed <= 1'b1; lat <= 1 + $urandom % 12; t_start <= now;
      n_start++;
    end else if (armed) begin
      cnt <= cnt + 1;
      if (cnt + 1 >= lat) model_ok <= 1'b1;
    end
    if (cycle_done && rst_n) begin
      model_ok <= 1'b0; armed <= 1'b0;
      n_done++;
      chk(armed && model_ok, "release only after the barrier flag rose");
      // last_cycle_hw counts clocks from the start pulse to the release decision
      chk(now - t_start >= lat, "cycle took at least the array's time");
    end
    ok_s1  <= model_ok;
    all_ok <= ok_s1;
  end

  initial begin
    run_valid = 0; run_cycles = 0; model_ok = 0; ok_s1 = 0; all_ok = 0; armed = 0; cnt = 0; lat = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 4; r++) begin
      int want, s0;
      want = 1 + r * 3;
      s0 = n_start;
      @(negedge clk); run_valid = 1; run_cycles = 32'(want);
      @(negedge clk); run_valid = 0;
      chk(busy, "busy after run request");
      wait (!busy);
      repeat (2) @(negedge clk);
      chk(n_start - s0 == want, "one start per requested RTL cycle");
      if (n_done != n_start) $display("n_done=%0d n_start=%0d", n_done, n_start);
      chk(n_done == n_start, "every started cycle released");
    end
    chk(rtl_cycles == 32'(1 + 4 + 7 + 10), "finished RTL-cycle count");
    // exact cycle time with a fixed array latency of 10 clocks
    @(negedge clk); run_valid = 1; run_cycles = 1;
    @(negedge clk); run_valid = 0;
    wait (!busy);
    // start at clock 0; flag after lat clocks, +2 register stages, +1 in the controller
    chk(last_cycle_hw >= 32'(lat + 3) && last_cycle_hw <= 32'(lat + 5), "last_cycle_hw matches the array's latency");
    $display("lat=%0d last_cycle_hw=%0d", lat, last_cycle_hw);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
