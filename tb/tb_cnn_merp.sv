// tb_cnn_merp: end-to-end test of the forward-propagation super layer at
// reduced size (K = 3, 2 CUs, up to 3 input and 5 output maps, 7 x 7 input,
// R = 2, P = 2). Three layers run back to back: all maps with pooling and a
// gappy input stream; fewer maps without pooling; one input and two output
// maps (one group, padded to the minimum dwell, output-buffer stalls).
// See cnn_merp_tb_body.svh for the checks.
module tb_cnn_merp;
  localparam int K = 3, NCU = 2, MAX_N = 3, MAX_M = 5, IN_H = 7, IN_W = 7, R = 2, P = 2;
  localparam int MIN_DWELL = 2;
  localparam int NRUNS = 3;
  localparam int run_n [NRUNS]    = '{3, 2, 1};
  localparam int run_m [NRUNS]    = '{5, 3, 2};
  localparam bit run_pool [NRUNS] = '{1, 0, 1};
  localparam int run_gap [NRUNS]  = '{30, 0, 10};
  localparam int WATCHDOG = 200000;
  localparam bit EXPECT_ALL = 1;

  `include "cnn_merp_tb_body.svh"

  // Watchdog: a run that hangs counts as a failure.
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  cnn_merp #(.K(K), .NCU(NCU), .MAX_N(MAX_N), .MAX_M(MAX_M), .IN_H(IN_H), .IN_W(IN_W), .R(R),
             .P(P), .MIN_DWELL(MIN_DWELL)) dut (.*);
endmodule
