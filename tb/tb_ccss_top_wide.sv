// tb_ccss_top_wide: the end-to-end test of ccss_top_test.svh with clusters at
// their full width, 36 cores and a 37-port crossbar each, on a ring cut down
// to 2 clusters (72 cores).
module tb_ccss_top_wide;
  import ccss_pkg::*;
  `include "ccss_tb_util.svh"
  localparam int NCL = 2, CS = DEF_CLUSTER_SIZE;

  ccss_top #(.N_CLUSTER(NCL), .CLUSTER_SIZE(CS)) dut (.*);

  `include "ccss_top_test.svh"

  // watchdog: a hung run fails instead of stalling
  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
