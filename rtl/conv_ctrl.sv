// conv_ctrl: data-flow controller of the convolution engine, including the
// logic-based reconfiguration.
//
// For every output position (r0,c0) in raster order (window moves left to
// right, then down) it walks the co-located windows of input maps
// i = 0..n_act-1, and for each window the output groups j = 0..G-1,
// G = ceil(m_act/NCU): in cycle (i,j) all NCU computational units share the
// window and CU number cu applies the kernel of output map o = j*NCU + cu.
// One window therefore serves all m output maps before the next map's window
// is fetched (window reuse between filters), the accumulators collect over i
// (no off-chip partial sums), and the next position reuses the cached rows.
// The loop bounds n_act and m_act are run-time registers, so a layer with
// fewer maps than the hardware maximum spends no cycles on invalid maps, as
// the paper describes; the nesting order follows the paper's data-flow
// figure. A window is held for at least MIN_DWELL cycles (padding with idle
// cycles when G is smaller) so that two updates of one accumulator are never
// closer than the adder latency; this and the handshakes are own choices.
//
// Stalls: issue waits while the input window is not yet in the input memory
// (stall_in), and before the first group of the last input map while the
// parallel-out buffer still holds the previous position (stall_out).
// Timing: one issue per cycle when not stalled; iss_* describe the cycle's
// issue; iss_rd_win is high on the first group of each window (window
// register load). done pulses after the last issue.
module conv_ctrl
  import cnn_merp_pkg::*;
#(
  parameter int unsigned K         = 5,
  parameter int unsigned NCU       = 16,
  parameter int unsigned MAX_N     = 48,
  parameter int unsigned MAX_M     = 128,
  parameter int unsigned IN_H      = 31,
  parameter int unsigned IN_W      = 31,
  parameter int unsigned MIN_DWELL = 2,
  localparam int unsigned OH  = IN_H - K + 1,
  localparam int unsigned OW  = IN_W - K + 1,
  localparam int unsigned MG  = (MAX_M + NCU - 1) / NCU,
  localparam int unsigned DW  = (MG > MIN_DWELL) ? MG : MIN_DWELL,
  localparam int unsigned RW  = $clog2(IN_H + 1),
  localparam int unsigned CW  = $clog2(IN_W + 1),
  localparam int unsigned KW  = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned NW  = $clog2(MAX_N + 1),
  localparam int unsigned MW  = $clog2(MAX_M + 1),
  localparam int unsigned GW  = $clog2(DW + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] n_act,
  input  logic [MW-1:0] m_act,
  output logic          busy,
  output logic          done,
  // reader position for the input memory
  output logic [RW-1:0] pos_r0,
  output logic [CW-1:0] pos_c0,
  output logic [KW-1:0] pos_r0mod,
  output logic [KW-1:0] pos_c0mod,
  output logic [CW-1:0] pos_c0div,
  output logic [NW-1:0] pos_i,
  input  logic          win_avail,
  // parallel-out buffer occupancy
  input  logic          pob_busy,
  output logic          pob_claim,
  // issue
  output logic          iss_valid,
  output logic          iss_rd_win,
  output logic [GW-1:0] iss_grp,
  output logic          iss_first,
  output logic          iss_last,
  output logic          iss_last_pos,
  output logic          stall_in,
  output logic          stall_out,
  output logic [GW-1:0] groups
);

  logic [GW-1:0] j, dwell;
  logic          run;

  // Active output groups and dwell per window (logic-based reconfiguration).
  always_comb begin
    groups = GW'((m_act + MW'(NCU - 1)) / MW'(NCU));
    dwell  = (groups > GW'(MIN_DWELL)) ? groups : GW'(MIN_DWELL);
  end

  logic last_map, last_grp, last_pos, want;
  assign last_map = (pos_i + 1'b1 == n_act);
  assign last_grp = (j + 1'b1 == dwell);
  assign last_pos = (pos_r0 == RW'(OH - 1)) && (pos_c0 == CW'(OW - 1));

  always_comb begin
    stall_in  = 1'b0;
    stall_out = 1'b0;
    if (run) begin
      if (j == '0 && !win_avail)
        stall_in = 1'b1;
      else if (j == '0 && last_map && pob_busy)
        stall_out = 1'b1;
    end
  end

  logic adv;
  assign adv        = run && !stall_in && !stall_out;
  assign want       = j < groups;
  assign iss_valid  = adv && want;
  assign iss_rd_win = adv && (j == '0);
  assign iss_grp    = j;
  assign iss_first  = (pos_i == '0);
  assign iss_last   = last_map;
  assign iss_last_pos = last_pos;
  assign pob_claim  = adv && (j == '0) && last_map;
  assign busy       = run;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0; done <= 1'b0; j <= '0;
      pos_r0 <= '0; pos_c0 <= '0; pos_r0mod <= '0; pos_c0mod <= '0; pos_c0div <= '0; pos_i <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run) begin
        run <= 1'b1; j <= '0;
        pos_r0 <= '0; pos_c0 <= '0; pos_r0mod <= '0; pos_c0mod <= '0; pos_c0div <= '0; pos_i <= '0;
      end else if (adv) begin
        if (!last_grp) begin
          j <= j + 1'b1;
        end else begin
          j <= '0;
          if (!last_map) begin
            pos_i <= pos_i + 1'b1;
          end else begin
            pos_i <= '0;
            if (last_pos) begin
              run  <= 1'b0;
              done <= 1'b1;
            end else if (pos_c0 == CW'(OW - 1)) begin
              pos_c0    <= '0;
              pos_c0mod <= '0;
              pos_c0div <= '0;
              pos_r0    <= pos_r0 + 1'b1;
              pos_r0mod <= (pos_r0mod == KW'(K - 1)) ? '0 : pos_r0mod + 1'b1;
            end else begin
              pos_c0 <= pos_c0 + 1'b1;
              if (pos_c0mod == KW'(K - 1)) begin
                pos_c0mod <= '0;
                pos_c0div <= pos_c0div + 1'b1;
              end else begin
                pos_c0mod <= pos_c0mod + 1'b1;
              end
            end
          end
        end
      end
    end
  end

  // Handshake rules.
  // Checks start one cycle after reset is released (a flop, so the reset
  // net itself is only used asynchronously).
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;
  end

  a_no_issue_when_stalled: assert property (@(posedge clk) disable iff (!chk_en)
    (stall_in || stall_out) |-> !iss_valid);
  a_grp_in_range: assert property (@(posedge clk) disable iff (!chk_en)
    iss_valid |-> (iss_grp < groups));

endmodule
