// po_buffer: parallel-out buffer between the accumulators and the
// activation/pooling stage.
//
// At the end of an output position the NCU accumulators deliver their
// finished sums one output group per cycle: group j carries output maps
// o = j*NCU + cu, cu = 0..NCU-1 (wr_mask marks maps beyond m_act). The
// buffer keeps all m co-located outputs and then drains them R per cycle:
// beat b presents maps b*R .. b*R+R-1 on the R lanes, ceil(m_act/R) beats in
// all, with the position tag of the set. The paper only names this buffer;
// its occupancy protocol is this design's choice: the controller claims the
// buffer (claim) when it starts the last input map of a position, busy stays
// high until the last beat of that position has left, and the controller
// does not claim it again before that.
//
// Timing: a write on wr_valid with wr_last starts the drain on the next
// cycle; one beat per cycle, no back-pressure from the output.
module po_buffer
  import cnn_merp_pkg::*;
#(
  parameter int unsigned NCU   = 16,
  parameter int unsigned MAX_M = 128,
  parameter int unsigned R     = 2,
  parameter int unsigned TAGW  = 10,
  localparam int unsigned MG   = (MAX_M + NCU - 1) / NCU,
  localparam int unsigned NB   = (MAX_M + R - 1) / R,
  localparam int unsigned GW   = (MG > 1) ? $clog2(MG) : 1,
  localparam int unsigned MW   = $clog2(MAX_M + 1),
  localparam int unsigned BW   = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic [MW-1:0]   m_act,
  input  logic            claim,
  output logic            busy,
  // write side: one output group per cycle
  input  logic            wr_valid,
  input  logic [GW-1:0]   wr_grp,
  input  logic [NCU-1:0]  wr_mask,
  input  fp32_t           wr_data [NCU],
  input  logic            wr_last,
  input  logic [TAGW-1:0] wr_tag,
  // read side: R lanes
  output logic [R-1:0]    out_valid,
  output fp32_t           out_data [R],
  output logic [BW-1:0]   out_beat,
  output logic            out_last,
  output logic [TAGW-1:0] out_tag
);

  fp32_t           buf_q [MG*NCU];
  logic            claimed, draining;
  logic [BW-1:0]   beat;
  logic [TAGW-1:0] tag_q;
  logic [BW:0]     nbeats;

  assign nbeats = (BW+1)'((m_act + MW'(R - 1)) / MW'(R));
  assign busy   = claimed || draining;

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      for (int cu = 0; cu < NCU; cu++)
        if (wr_mask[cu]) buf_q[int'(wr_grp) * NCU + cu] <= wr_data[cu];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      claimed  <= 1'b0;
      draining <= 1'b0;
      beat     <= '0;
      tag_q    <= '0;
    end else begin
      if (claim) claimed <= 1'b1;
      if (wr_valid && wr_last) begin
        draining <= 1'b1;
        beat     <= '0;
        tag_q    <= wr_tag;
      end else if (draining) begin
        if ({1'b0, beat} + 1'b1 == nbeats) begin
          draining <= 1'b0;
          claimed  <= 1'b0;
        end
        beat <= beat + 1'b1;
      end
    end
  end

  always_comb begin
    for (int g = 0; g < R; g++) begin
      int unsigned o;
      o = int'(beat) * R + g;
      out_valid[g] = draining && (o < int'(m_act)) && (o < MG * NCU);
      out_data[g]  = (o < MG * NCU) ? buf_q[o] : FP32_ZERO;
    end
    out_beat = beat;
    out_last = draining && ({1'b0, beat} + 1'b1 == nbeats);
    out_tag  = tag_q;
  end

  // Checks start one cycle after reset is released (a flop, so the reset
  // net itself is only used asynchronously).
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;
  end

  a_no_claim_when_busy: assert property (@(posedge clk) disable iff (!chk_en)
    claim |-> !busy);

endmodule
