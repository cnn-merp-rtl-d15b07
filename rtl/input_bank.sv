// input_bank: one two-port SRAM bank of the input memory hierarchy. One port
// writes (fed by the bank router), the other reads (towards the active
// window), both synchronous. rd_data changes only on a cycle with rd_en and
// holds otherwise. A read and a write of the same address in the same cycle
// return the old contents; the controller never issues that case.
module input_bank
  import cnn_merp_pkg::*;
#(
  parameter int unsigned DEPTH = 336,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  fp32_t         wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output fp32_t         rd_data
);

  fp32_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
