// relu: rectified linear unit for one single-precision element, y = max(0, x).
// A negative input (sign bit set) gives +0, anything else passes unchanged.
// The output is registered: out_valid/y follow in_valid/x by one cycle.
module relu
  import cnn_merp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  fp32_t x,
  output logic  out_valid,
  output fp32_t y
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= FP32_ZERO;
    end else begin
      out_valid <= in_valid;
      y         <= x[31] ? FP32_ZERO : x;
    end
  end

endmodule
