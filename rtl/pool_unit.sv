// pool_unit: average-pooling unit (PU) for one lane of activated outputs.
//
// Outputs of the convolution arrive in raster order of their position (r,c),
// each tagged with a lane-local map index idx. For every map and every pooled
// column the pooling cache keeps the running sum of the current P x P
// pooling window. Each arriving element is added to its cache entry; when it
// is the last element of its window (r mod P = P-1 and c mod P = P-1, the
// "finished?" test) the sum is sent on, scaled by 1/(P*P), and zero is
// written back instead of the sum, so the entry is ready for the next window
// below. Cache, adder, zero multiplexer and finish test follow the paper's
// pooling-unit figure. Own choices: non-overlapping windows (stride P),
// elements outside the last whole window are ignored, entries carry a valid
// bit cleared by clear so a new layer starts from zero, the scale is a
// floating-point multiply by the rounded constant 1/(P*P), and a sum still
// in the adder is forwarded to an immediately following update of the same
// entry (updates of one entry must be >= 2 cycles apart).
//
// Timing: out_* follow the finishing input by 4 cycles (adder 2 + scale 2).
module pool_unit
  import cnn_merp_pkg::*;
#(
  parameter int unsigned P    = 2,
  parameter int unsigned OH   = 27,
  parameter int unsigned OW   = 27,
  parameter int unsigned MAXL = 64,
  localparam int unsigned PH  = OH / P,
  localparam int unsigned PW  = OW / P,
  localparam int unsigned DEPTH = MAXL * PW,
  localparam int unsigned AW  = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned LW  = (MAXL > 1) ? $clog2(MAXL) : 1,
  localparam int unsigned RW  = $clog2(OH + 1),
  localparam int unsigned CW  = $clog2(OW + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  input  fp32_t         in_data,
  input  logic [LW-1:0] in_idx,
  input  logic [RW-1:0] in_r,
  input  logic [CW-1:0] in_c,
  output logic          out_valid,
  output fp32_t         out_data,
  output logic [LW-1:0] out_idx,
  output logic [RW-1:0] out_r,
  output logic [CW-1:0] out_c
);

  localparam fp32_t SCALE = fp32_recip(P * P);

  fp32_t          cache [DEPTH];
  logic [DEPTH-1:0] vbit;

  // ---------------- decode ----------------
  logic          use_c, fin_c;
  logic [AW-1:0] addr_c;
  always_comb begin
    use_c  = in_valid && (int'(in_r) < PH * P) && (int'(in_c) < PW * P);
    fin_c  = (int'(in_r) % P == P - 1) && (int'(in_c) % P == P - 1);
    addr_c = AW'(int'(in_idx) * PW + int'(in_c) / P);
  end

  // ---------------- accumulate ----------------
  logic          v_d  [FP_LAT];
  logic          f_d  [FP_LAT];
  logic [AW-1:0] a_d  [FP_LAT];
  logic [LW-1:0] i_d  [FP_LAT];
  logic [RW-1:0] r_d  [FP_LAT];
  logic [CW-1:0] c_d  [FP_LAT];

  logic  sum_v;
  fp32_t sum, addend;

  always_comb begin
    if (v_d[FP_LAT-1] && a_d[FP_LAT-1] == addr_c)
      addend = f_d[FP_LAT-1] ? FP32_ZERO : sum;   // forwarding
    else if (vbit[addr_c])
      addend = cache[addr_c];
    else
      addend = FP32_ZERO;
  end

  fp_add u_add (
    .clk, .rst_n,
    .in_valid (use_c),
    .a        (addend),
    .b        (in_data),
    .out_valid(sum_v),
    .y        (sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < FP_LAT; s++) begin
        v_d[s] <= 1'b0; f_d[s] <= 1'b0; a_d[s] <= '0;
        i_d[s] <= '0;   r_d[s] <= '0;   c_d[s] <= '0;
      end
    end else begin
      v_d[0] <= use_c; f_d[0] <= fin_c; a_d[0] <= addr_c;
      i_d[0] <= in_idx; r_d[0] <= in_r; c_d[0] <= in_c;
      for (int s = 1; s < FP_LAT; s++) begin
        v_d[s] <= v_d[s-1]; f_d[s] <= f_d[s-1]; a_d[s] <= a_d[s-1];
        i_d[s] <= i_d[s-1]; r_d[s] <= r_d[s-1]; c_d[s] <= c_d[s-1];
      end
    end
  end

  // Pooling cache write-back: zero when the window finished, else the sum.
  always_ff @(posedge clk) begin
    if (sum_v)
      cache[a_d[FP_LAT-1]] <= f_d[FP_LAT-1] ? FP32_ZERO : sum;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)
      vbit <= '0;
    else if (clear)
      vbit <= '0;
    else if (sum_v)
      vbit[a_d[FP_LAT-1]] <= 1'b1;
  end

  // ---------------- scale by 1/(P*P) ----------------
  logic [LW-1:0] i_s [FP_LAT];
  logic [RW-1:0] r_s [FP_LAT];
  logic [CW-1:0] c_s [FP_LAT];

  fp_mul u_scale (
    .clk, .rst_n,
    .in_valid (sum_v && f_d[FP_LAT-1]),
    .a        (sum),
    .b        (SCALE),
    .out_valid(out_valid),
    .y        (out_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < FP_LAT; s++) begin
        i_s[s] <= '0; r_s[s] <= '0; c_s[s] <= '0;
      end
    end else begin
      i_s[0] <= i_d[FP_LAT-1];
      r_s[0] <= RW'(int'(r_d[FP_LAT-1]) / P);
      c_s[0] <= CW'(int'(c_d[FP_LAT-1]) / P);
      for (int s = 1; s < FP_LAT; s++) begin
        i_s[s] <= i_s[s-1]; r_s[s] <= r_s[s-1]; c_s[s] <= c_s[s-1];
      end
    end
  end

  assign out_idx = i_s[FP_LAT-1];
  assign out_r   = r_s[FP_LAT-1];
  assign out_c   = c_s[FP_LAT-1];

endmodule
