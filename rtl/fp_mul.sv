// fp_mul: two-stage pipelined IEEE-754 single-precision multiplier, the
// multiplier cell of a computational unit.
//
// Stage 1 unpacks both operands, multiplies the 24-bit significands into a
// 48-bit product and adds the biased exponents. Stage 2 normalises the
// product by at most one position, rounds to nearest-even and packs the
// result. The two-stage split follows the computational-unit description;
// everything below it is this design's own choice: subnormal inputs and
// results are flushed to signed zero (an FPGA-typical simplification),
// overflow gives infinity, and any NaN, or infinity times zero, gives the
// quiet NaN 0x7fc00000.
//
// Interface: in_valid/a/b are sampled every cycle; out_valid/y appear exactly
// LAT = 2 cycles later. There is no stall: the pipeline always advances.
module fp_mul
  import cnn_merp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t a,
  input  fp32_t b,
  output logic  out_valid,
  output fp32_t y
);

  // ---------------- stage 1: unpack and multiply ----------------
  fp32_fields_t fa, fb;
  assign fa = a;
  assign fb = b;

  logic a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  assign a_zero = (fa.exp == 8'd0);
  assign b_zero = (fb.exp == 8'd0);
  assign a_inf  = (fa.exp == 8'hff) && (fa.man == '0);
  assign b_inf  = (fb.exp == 8'hff) && (fb.man == '0);
  assign a_nan  = (fa.exp == 8'hff) && (fa.man != '0);
  assign b_nan  = (fb.exp == 8'hff) && (fb.man != '0);

  logic        s1_valid, s1_sign, s1_zero, s1_inf, s1_nan;
  logic [47:0] s1_prod;
  logic signed [10:0] s1_exp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_sign  <= 1'b0;
      s1_zero  <= 1'b1;
      s1_inf   <= 1'b0;
      s1_nan   <= 1'b0;
      s1_prod  <= '0;
      s1_exp   <= '0;
    end else begin
      s1_valid <= in_valid;
      s1_sign  <= fa.sign ^ fb.sign;
      s1_nan   <= a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero);
      s1_inf   <= a_inf || b_inf;
      s1_zero  <= a_zero || b_zero;
      s1_prod  <= {1'b1, fa.man} * {1'b1, fb.man};
      s1_exp   <= $signed({3'b000, fa.exp}) + $signed({3'b000, fb.exp}) - 11'sd127;
    end
  end

  // ---------------- stage 2: normalise, round, pack ----------------
  logic [22:0] man_t;
  logic        guard, sticky, round_up;
  logic [23:0] man_r;
  logic signed [10:0] exp_n, exp_r;
  fp32_t       y_c;

  always_comb begin
    if (s1_prod[47]) begin
      man_t  = s1_prod[46:24];
      guard  = s1_prod[23];
      sticky = |s1_prod[22:0];
      exp_n  = s1_exp + 11'sd1;
    end else begin
      man_t  = s1_prod[45:23];
      guard  = s1_prod[22];
      sticky = |s1_prod[21:0];
      exp_n  = s1_exp;
    end
    round_up = guard && (sticky || man_t[0]);
    man_r    = {1'b0, man_t} + {23'd0, round_up};
    exp_r    = man_r[23] ? exp_n + 11'sd1 : exp_n;

    if (s1_nan)
      y_c = 32'h7fc0_0000;
    else if (s1_inf)
      y_c = {s1_sign, 8'hff, 23'd0};
    else if (s1_zero || exp_r <= 11'sd0)
      y_c = {s1_sign, 31'd0};
    else if (exp_r >= 11'sd255)
      y_c = {s1_sign, 8'hff, 23'd0};
    else
      y_c = {s1_sign, exp_r[7:0], man_r[22:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
    end else begin
      out_valid <= s1_valid;
      y         <= y_c;
    end
  end

endmodule
