// fp_add: two-stage pipelined IEEE-754 single-precision adder, the adder cell
// of a computational unit's reduction tree, of the accumulators and of the
// pooling units.
//
// Stage 1 unpacks, orders the operands by magnitude, aligns the smaller
// significand with guard, round and sticky bits and adds or subtracts.
// Stage 2 normalises (right by one after a carry, left by the leading-zero
// count after cancellation), rounds to nearest-even and packs. The two-stage
// split follows the computational-unit description; the rest is this
// design's own choice: subnormals are flushed to signed zero, exact
// cancellation gives +0, overflow gives infinity, NaN or inf-inf gives the
// quiet NaN 0x7fc00000.
//
// Interface: in_valid/a/b are sampled every cycle; out_valid/y appear exactly
// LAT = 2 cycles later, with no stall.
module fp_add
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

  // ---------------- stage 1: order, align, add ----------------
  fp32_fields_t fa, fb, fl, fs;
  assign fa = a;
  assign fb = b;

  logic a_nan, b_nan, a_inf, b_inf;
  assign a_nan = (fa.exp == 8'hff) && (fa.man != '0);
  assign b_nan = (fb.exp == 8'hff) && (fb.man != '0);
  assign a_inf = (fa.exp == 8'hff) && (fa.man == '0);
  assign b_inf = (fb.exp == 8'hff) && (fb.man == '0);

  logic        swap;
  logic [7:0]  diff;
  logic [26:0] sig_l, sig_s, sig_s_sh;
  logic [27:0] sum_c;
  logic        sticky_c;

  always_comb begin
    // Larger magnitude goes to fl (exponent first, then mantissa).
    swap = {fb.exp, fb.man} > {fa.exp, fa.man};
    fl   = swap ? fb : fa;
    fs   = swap ? fa : fb;
    diff = fl.exp - fs.exp;
    // Subnormals are flushed: a zero exponent means a zero significand.
    sig_l = (fl.exp == 8'd0) ? 27'd0 : {1'b1, fl.man, 3'b000};
    sig_s = (fs.exp == 8'd0) ? 27'd0 : {1'b1, fs.man, 3'b000};
    if (diff >= 8'd27) begin
      sig_s_sh = 27'd0;
      sticky_c = (sig_s != 27'd0);
    end else begin
      sig_s_sh = sig_s >> diff;
      sticky_c = ((sig_s_sh << diff) != sig_s);
    end
    sig_s_sh[0] = sig_s_sh[0] | sticky_c;
    if (fl.sign == fs.sign)
      sum_c = {1'b0, sig_l} + {1'b0, sig_s_sh};
    else
      sum_c = {1'b0, sig_l} - {1'b0, sig_s_sh};
  end

  logic        s1_valid, s1_sign, s1_nan, s1_inf, s1_inf_sign;
  logic [7:0]  s1_exp;
  logic [27:0] s1_sum;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid    <= 1'b0;
      s1_sign     <= 1'b0;
      s1_nan      <= 1'b0;
      s1_inf      <= 1'b0;
      s1_inf_sign <= 1'b0;
      s1_exp      <= '0;
      s1_sum      <= '0;
    end else begin
      s1_valid    <= in_valid;
      s1_sign     <= fl.sign;
      s1_nan      <= a_nan || b_nan || (a_inf && b_inf && (fa.sign != fb.sign));
      s1_inf      <= a_inf || b_inf;
      s1_inf_sign <= a_inf ? fa.sign : fb.sign;
      s1_exp      <= fl.exp;
      s1_sum      <= sum_c;
    end
  end

  // ---------------- stage 2: normalise, round, pack ----------------
  logic [4:0]  lz;
  logic [26:0] norm;
  logic signed [9:0] exp_n, exp_r;
  logic        round_up;
  logic [24:0] man_r;
  fp32_t       y_c;

  always_comb begin
    // Leading-zero count of s1_sum[26:0] (valid when bit 27 is clear).
    lz = 5'd27;
    for (int i = 0; i <= 26; i++)
      if (s1_sum[i]) lz = 5'(26 - i);

    if (s1_sum[27]) begin
      norm  = {s1_sum[27:2], s1_sum[1] | s1_sum[0]};
      exp_n = $signed({2'b00, s1_exp}) + 10'sd1;
    end else begin
      norm  = s1_sum[26:0] << lz;
      exp_n = $signed({2'b00, s1_exp}) - $signed({5'd0, lz});
    end
    // norm[26] is the hidden one, [25:3] the mantissa, [2] guard, [1:0] round/sticky.
    round_up = norm[2] && ((|norm[1:0]) || norm[3]);
    man_r    = {1'b0, norm[26:3]} + {24'd0, round_up};
    exp_r    = man_r[24] ? exp_n + 10'sd1 : exp_n;

    if (s1_nan)
      y_c = 32'h7fc0_0000;
    else if (s1_inf)
      y_c = {s1_inf_sign, 8'hff, 23'd0};
    else if (s1_sum == 28'd0)
      y_c = 32'h0000_0000;
    else if (exp_r <= 10'sd0)
      y_c = {s1_sign, 31'd0};
    else if (exp_r >= 10'sd255)
      y_c = {s1_sign, 8'hff, 23'd0};
    else if (man_r[24])
      y_c = {s1_sign, exp_r[7:0], man_r[23:1]};
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
