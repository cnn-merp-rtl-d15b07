// acc_bank: the accumulators ("acc's") behind one computational unit.
//
// A CU produces, for the current output position, one partial result per
// (input map i, output group j). The paper keeps these partial sums on chip
// instead of writing them out: the accumulator for output group j adds the
// partial result of every input map in turn and only the finished sum leaves.
// This block holds MG accumulators (one per output group the CU serves), uses
// one two-stage floating-point adder, and:
//   * on in_first (input map 0) adds the partial result to zero,
//   * otherwise adds it to the stored sum of group in_grp,
//   * on in_last (last active input map) also presents the sum on out_*.
// A sum that is still in the adder is forwarded to a following update of the
// same group, so two updates of one group must be at least FP_LAT = 2 cycles
// apart (the controller guarantees this). Forwarding and the register-array
// storage are this design's choices.
//
// Timing: out_valid/out_grp/out_data appear FP_LAT = 2 cycles after the
// in_valid that carried in_last.
module acc_bank
  import cnn_merp_pkg::*;
#(
  parameter int unsigned MG = 8,
  localparam int unsigned GW = (MG > 1) ? $clog2(MG) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [GW-1:0] in_grp,
  input  logic          in_first,
  input  logic          in_last,
  input  fp32_t         in_data,
  output logic          out_valid,
  output logic [GW-1:0] out_grp,
  output fp32_t         out_data
);

  fp32_t acc [MG];

  // Side information travelling with the adder.
  logic [GW-1:0] grp_d [FP_LAT];
  logic          last_d [FP_LAT];
  logic          vld_d  [FP_LAT];

  logic  sum_valid;
  fp32_t sum;
  fp32_t addend;

  always_comb begin
    if (in_first)
      addend = FP32_ZERO;
    else if (vld_d[FP_LAT-1] && grp_d[FP_LAT-1] == in_grp)
      addend = sum;                       // forward the sum being written
    else
      addend = acc[in_grp];
  end

  fp_add u_add (
    .clk, .rst_n,
    .in_valid (in_valid),
    .a        (addend),
    .b        (in_data),
    .out_valid(sum_valid),
    .y        (sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < FP_LAT; s++) begin
        grp_d[s]  <= '0;
        last_d[s] <= 1'b0;
        vld_d[s]  <= 1'b0;
      end
    end else begin
      grp_d[0]  <= in_grp;
      last_d[0] <= in_last;
      vld_d[0]  <= in_valid;
      for (int s = 1; s < FP_LAT; s++) begin
        grp_d[s]  <= grp_d[s-1];
        last_d[s] <= last_d[s-1];
        vld_d[s]  <= vld_d[s-1];
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < MG; g++) acc[g] <= FP32_ZERO;
    end else if (sum_valid) begin
      acc[grp_d[FP_LAT-1]] <= sum;
    end
  end

  assign out_valid = sum_valid && last_d[FP_LAT-1];
  assign out_grp   = grp_d[FP_LAT-1];
  assign out_data  = sum;

endmodule
