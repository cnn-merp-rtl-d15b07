// act_pool: activation and pooling stage, R parallel groups of one ReLU
// followed by one pooling unit (PU).
//
// The parallel-out buffer delivers up to R co-located outputs per cycle:
// lane g carries output map beat*R + g of conv position (in_r, in_c). Every
// lane applies ReLU; the activated values leave on act_* (for layers
// without pooling, and as the activation outputs backward propagation
// needs), and, when pool_en is set, also enter the lane's PU, which averages
// P x P neighbours. A PU only ever sees the maps of its own lane, so its
// cache holds ceil(MAX_M/R) maps. R groups in parallel follow the paper
// (R = 2); pool_en and the two output streams are this design's choices.
//
// Timing: act_* follow the input by 1 cycle, pool_* follow the last element
// of a pooling window by 5 cycles. No back-pressure.
module act_pool
  import cnn_merp_pkg::*;
#(
  parameter int unsigned R     = 2,
  parameter int unsigned P     = 2,
  parameter int unsigned OH    = 27,
  parameter int unsigned OW    = 27,
  parameter int unsigned MAX_M = 128,
  localparam int unsigned MAXL = (MAX_M + R - 1) / R,
  localparam int unsigned LW   = (MAXL > 1) ? $clog2(MAXL) : 1,
  localparam int unsigned RW   = $clog2(OH + 1),
  localparam int unsigned CW   = $clog2(OW + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          pool_en,
  input  logic [R-1:0]  in_valid,
  input  fp32_t         in_data [R],
  input  logic [LW-1:0] in_beat,
  input  logic [RW-1:0] in_r,
  input  logic [CW-1:0] in_c,
  output logic [R-1:0]  act_valid,
  output fp32_t         act_data [R],
  output logic [LW-1:0] act_beat,
  output logic [RW-1:0] act_r,
  output logic [CW-1:0] act_c,
  output logic [R-1:0]  pool_valid,
  output fp32_t         pool_data [R],
  output logic [LW-1:0] pool_beat,
  output logic [RW-1:0] pool_r,
  output logic [CW-1:0] pool_c
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_beat <= '0; act_r <= '0; act_c <= '0;
    end else begin
      act_beat <= in_beat; act_r <= in_r; act_c <= in_c;
    end
  end

  for (genvar g = 0; g < R; g++) begin : g_lane
    logic [LW-1:0] p_idx;
    logic [RW-1:0] p_r;
    logic [CW-1:0] p_c;

    relu u_relu (
      .clk, .rst_n,
      .in_valid (in_valid[g]),
      .x        (in_data[g]),
      .out_valid(act_valid[g]),
      .y        (act_data[g])
    );

    pool_unit #(.P(P), .OH(OH), .OW(OW), .MAXL(MAXL)) u_pu (
      .clk, .rst_n,
      .clear    (clear),
      .in_valid (act_valid[g] && pool_en),
      .in_data  (act_data[g]),
      .in_idx   (act_beat),
      .in_r     (act_r),
      .in_c     (act_c),
      .out_valid(pool_valid[g]),
      .out_data (pool_data[g]),
      .out_idx  (p_idx),
      .out_r    (p_r),
      .out_c    (p_c)
    );

    // All lanes move in lock step; lane 0 provides the shared tags.
    if (g == 0) begin : g_tag
      assign pool_beat = p_idx;
      assign pool_r    = p_r;
      assign pool_c    = p_c;
    end
  end

endmodule
