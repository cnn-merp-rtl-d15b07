// tb_cnn_merp_full: end-to-end test of the forward-propagation super layer
// with every parameter at its default, i.e. the AlexNet second-layer mapping:
// 5x5 kernels, 16 CUs, 48 input maps of 31 x 31 (27 x 27 plus a zero border
// of 2), 128 output maps, R = 2, 2 x 2 average pooling. One complete layer
// is run with a full-rate input stream and all outputs are compared with
// the reference. See cnn_merp_tb_body.svh for the checks.
module tb_cnn_merp_full;
  localparam int K = 5, NCU = 16, MAX_N = 48, MAX_M = 128, IN_H = 31, IN_W = 31, R = 2, P = 2;
  localparam int MIN_DWELL = 2;
  localparam int NRUNS = 1;
  localparam int run_n [NRUNS]    = '{48};
  localparam int run_m [NRUNS]    = '{128};
  localparam bit run_pool [NRUNS] = '{1};
  localparam int run_gap [NRUNS]  = '{0};
  localparam int WATCHDOG = 2000000;
  localparam bit EXPECT_ALL = 0;

  `include "cnn_merp_tb_body.svh"

  // Watchdog: a run that hangs counts as a failure.
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cnn_merp dut (.*);
endmodule
