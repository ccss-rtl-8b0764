// tb_ccss_top: end-to-end test of the accelerator at a reduced size
// (3 clusters of 4 cores). The test body is ccss_top_test.svh: a small
// netlist spread over four cores that exercises compute, local, crossbar and
// ring synchronisation and the global barrier, checked by host read-back.
module tb_ccss_top;
  import ccss_pkg::*;
  `include "ccss_tb_util.svh"
  localparam int NCL = 3, CS = 4;

  ccss_top #(.N_CLUSTER(NCL), .CLUSTER_SIZE(CS)) dut (.*);

  `include "ccss_top_test.svh"

  // watchdog: a hung run fails instead of stalling
  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
