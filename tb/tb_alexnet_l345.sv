// tb_alexnet_l345: workload test for the 3x3-kernel layers of AlexNet
// (conv layers 3, 4 and 5 of one half of the network), which share one
// hardware build and move between layers by logic-based reconfiguration
// only: the layer is changed by writing new n_act / m_act values, without
// elaborating the design again.
//
// The layer geometry is the real one: 3 x 3 kernels, 13 x 13 outputs from a
// 15 x 15 input (13 x 13 plus a zero border of 1), stride 1. The map counts
// and the number of CUs are those of the reference build divided by 16, so
// the simulation stays short while every ratio is kept:
//
//   reference build: 48 CUs, layer 3 256 -> 384 maps, layer 4 192 -> 192,
//                    layer 5 192 -> 128
//   this test:        3 CUs, layer 3  16 ->  24 maps, layer 4  12 ->  12,
//                    layer 5  12 ->   8
//
// The groups per window are then 8, 4 and 3, so the CUs are busy 100%,
// 100% and 8/9 = 88.9% of the issue cycles, the same figures as for the
// reference build. The shared checking environment confirms the cycle
// count behind those figures: the unstalled busy cycles of each layer must
// equal 169 * n * groups plus a short fill / drain allowance. Layers 3 and 4
// run without pooling and layer 5 with 2 x 2 pooling (13 x 13 -> 6 x 6).
// Every activation and pooled output is compared bit for bit with the
// reference. See cnn_merp_tb_body.svh for the checks.
module tb_alexnet_l345;
  localparam int K = 3, NCU = 3, MAX_N = 16, MAX_M = 24, IN_H = 15, IN_W = 15, R = 2, P = 2;
  localparam int MIN_DWELL = 2;
  localparam int NRUNS = 3;
  localparam int run_n [NRUNS]    = '{16, 12, 12};
  localparam int run_m [NRUNS]    = '{24, 12, 8};
  localparam bit run_pool [NRUNS] = '{0, 0, 1};
  localparam int run_gap [NRUNS]  = '{0, 0, 0};
  localparam int WATCHDOG = 400000;
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

  cnn_merp #(.K(K), .NCU(NCU), .MAX_N(MAX_N), .MAX_M(MAX_M), .IN_H(IN_H), .IN_W(IN_W), .R(R),
             .P(P), .MIN_DWELL(MIN_DWELL)) dut (.*);
endmodule
