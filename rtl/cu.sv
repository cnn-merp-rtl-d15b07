// cu: computational unit. It evaluates one filter, the dot product of a
// k x k input window with a k x k kernel, every clock cycle.
//
// All k*k products are formed in parallel by two-stage floating-point
// multipliers and are then reduced by a tree of k*k-1 two-stage floating-point
// adders, so a new window can enter every cycle (as in the paper's
// computational unit). The tree pairs neighbouring operands level by level
// (0+1, 2+3, ...); an odd operand left at the end of a level is carried to
// the next level through two delay registers so that all operands of a level
// stay aligned. The pairing order is this design's choice; the paper only
// draws a balanced tree for k = 2.
//
// Interface: in_valid with win[]/ker[] (row-major, element u*K+v) are sampled
// every cycle; out_valid/y follow LAT = 2 + 2*ceil(log2(K*K)) cycles later
// (12 for K = 5). There is no back-pressure.
module cu
  import cnn_merp_pkg::*;
#(
  parameter int unsigned K = 5
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t win [K*K],
  input  fp32_t ker [K*K],
  output logic  out_valid,
  output fp32_t y
);

  localparam int unsigned KK     = K * K;
  localparam int unsigned LEVELS = tree_levels(KK);
  localparam int unsigned LAT    = FP_LAT * (LEVELS + 1);

  // lvl[l][e]: operand e of tree level l; level 0 holds the products.
  fp32_t lvl   [LEVELS+1][KK];
  logic  lvl_v [LEVELS+1];

  // ---------------- k*k parallel multipliers ----------------
  for (genvar e = 0; e < KK; e++) begin : g_mul
    logic v;
    fp_mul u_mul (
      .clk, .rst_n,
      .in_valid (in_valid),
      .a        (win[e]),
      .b        (ker[e]),
      .out_valid(v),
      .y        (lvl[0][e])
    );
    if (e == 0) begin : g_v
      assign lvl_v[0] = v;
    end
  end

  // ---------------- adder tree ----------------
  for (genvar l = 1; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned NIN  = tree_width(KK, l - 1);
    localparam int unsigned NOUT = tree_width(KK, l);
    for (genvar e = 0; e < NOUT; e++) begin : g_node
      if (2 * e + 1 < NIN) begin : g_add
        logic v;
        fp_add u_add (
          .clk, .rst_n,
          .in_valid (lvl_v[l-1]),
          .a        (lvl[l-1][2*e]),
          .b        (lvl[l-1][2*e+1]),
          .out_valid(v),
          .y        (lvl[l][e])
        );
        if (e == 0) begin : g_v
          assign lvl_v[l] = v;
        end
      end else begin : g_pass
        // Odd operand: delay it by the adder latency.
        fp32_t d [FP_LAT];
        always_ff @(posedge clk or negedge rst_n) begin
          if (!rst_n) begin
            for (int s = 0; s < FP_LAT; s++) d[s] <= '0;
          end else begin
            d[0] <= lvl[l-1][2*e];
            for (int s = 1; s < FP_LAT; s++) d[s] <= d[s-1];
          end
        end
        assign lvl[l][e] = d[FP_LAT-1];
      end
    end
    // Unused slots of this level.
    for (genvar e = NOUT; e < KK; e++) begin : g_unused
      assign lvl[l][e] = '0;
    end
  end

  assign out_valid = lvl_v[LEVELS];
  assign y         = lvl[LEVELS][0];

  // The documented latency must match the structure.
  initial begin
    assert (LAT == FP_LAT * (1 + LEVELS))
      else $error("cu: latency mismatch");
  end

endmodule
