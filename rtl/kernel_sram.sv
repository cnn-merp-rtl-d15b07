// kernel_sram: kernel store of one computational unit. Every CU owns one such
// memory holding all the kernels it will ever apply in the current layer, so
// kernels never travel off chip during a batch (on-chip kernel allocation).
//
// A word holds one whole k x k kernel (K*K single-precision elements) so that
// the CU receives its kernel in a single read. Word address = i*MG + j, where
// i is the input feature map and j the output group handled by this CU
// (output map o = j*NCU + cu). That addressing is this design's choice.
// Loading is element by element through the write port (one 32-bit element
// per cycle, selected by wr_elem) before a batch starts.
//
// Timing: synchronous read, rd_data is valid the cycle after rd_en and holds
// its value while rd_en is low (it doubles as the register drawn between the
// kernel SRAM and the multipliers). The write port is independent.
module kernel_sram
  import cnn_merp_pkg::*;
#(
  parameter int unsigned K     = 5,
  parameter int unsigned DEPTH = 384,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned KK   = K * K,
  localparam int unsigned EW   = (KK > 1) ? $clog2(KK) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [EW-1:0] wr_elem,
  input  fp32_t         wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output fp32_t         rd_data [KK]
);

  logic [KK*32-1:0] mem [DEPTH];
  logic [KK*32-1:0] q;

  always_ff @(posedge clk) begin
    if (wr_en)
      mem[wr_addr][32*wr_elem +: 32] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (rd_en)
      q <= mem[rd_addr];
  end

  for (genvar e = 0; e < KK; e++) begin : g_out
    assign rd_data[e] = q[32*e +: 32];
  end

endmodule
