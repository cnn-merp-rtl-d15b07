// cnn_merp: forward-propagation super layer of the CNN-MERP processor:
// convolution, ReLU activation and average pooling of one layer in one pass,
// with every input and output feature-map element crossing the chip boundary
// exactly once.
//
// Data path: the input memory hierarchy caches K rows of all input maps and
// yields one K x K window per read. The window is held in a register and
// shared by NCU computational units; each CU multiplies it by a kernel from
// its own kernel SRAM (all kernels are on chip, loaded before a batch) and
// reduces the K*K products in a pipelined adder tree. The per-CU
// accumulators sum the partial results over the input maps, the
// parallel-out buffer collects the m finished outputs of a position and
// feeds R ReLU + pooling lanes. The controller walks positions, input maps
// and output groups with run-time bounds n_act/m_act (logic-based
// reconfiguration). Default sizes are those of AlexNet's second layer as
// mapped in the paper: 5x5 kernels, 48 input and 128 output maps, 16 CUs,
// R = 2; the 27x27 input is assumed already zero-padded to 31x31.
//
// Interfaces (all towards the external memory controller or host):
//   kernel load: ker_we/ker_cu/ker_addr/ker_elem/ker_data, one element per
//     cycle, address i*MG + j of CU ker_cu holds the kernel of input map i,
//     output map j*NCU + ker_cu, element u*K+v.
//   configuration: n_act, m_act, pool_en sampled on start (pulse).
//   input stream: in_valid/in_ready/in_data, order row, column, map.
//   outputs: act_* (ReLU results, lane g = map act_beat*R + g at conv
//     position act_r/act_c) and pool_* (pooled results, pooled position).
//   status: busy, done (pulse after the last output), stall_in, stall_out.
// Timing: one (window, output group) per cycle when not stalled; a position
// takes n_act * max(ceil(m_act/NCU), MIN_DWELL) issue cycles.
module cnn_merp
  import cnn_merp_pkg::*;
#(
  parameter int unsigned K         = 5,
  parameter int unsigned NCU       = 16,
  parameter int unsigned MAX_N     = 48,
  parameter int unsigned MAX_M     = 128,
  parameter int unsigned IN_H      = 31,
  parameter int unsigned IN_W      = 31,
  parameter int unsigned R         = 2,
  parameter int unsigned P         = 2,
  parameter int unsigned MIN_DWELL = 2,
  localparam int unsigned KK   = K * K,
  localparam int unsigned OH   = IN_H - K + 1,
  localparam int unsigned OW   = IN_W - K + 1,
  localparam int unsigned MG   = (MAX_M + NCU - 1) / NCU,
  localparam int unsigned DW   = (MG > MIN_DWELL) ? MG : MIN_DWELL,
  localparam int unsigned KDEP = MAX_N * MG,
  localparam int unsigned KAW  = (KDEP > 1) ? $clog2(KDEP) : 1,
  localparam int unsigned EW   = (KK > 1) ? $clog2(KK) : 1,
  localparam int unsigned CUW  = (NCU > 1) ? $clog2(NCU) : 1,
  localparam int unsigned NW   = $clog2(MAX_N + 1),
  localparam int unsigned MW   = $clog2(MAX_M + 1),
  localparam int unsigned GW   = $clog2(DW + 1),
  localparam int unsigned AGW  = (MG > 1) ? $clog2(MG) : 1,
  localparam int unsigned RW   = $clog2(IN_H + 1),
  localparam int unsigned CW   = $clog2(IN_W + 1),
  localparam int unsigned ORW  = $clog2(OH + 1),
  localparam int unsigned OCW  = $clog2(OW + 1),
  localparam int unsigned MAXL = (MAX_M + R - 1) / R,
  localparam int unsigned LW   = (MAXL > 1) ? $clog2(MAXL) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  // configuration
  input  logic           start,
  input  logic [NW-1:0]  n_act,
  input  logic [MW-1:0]  m_act,
  input  logic           pool_en,
  output logic           busy,
  output logic           done,
  // kernel load
  input  logic           ker_we,
  input  logic [CUW-1:0] ker_cu,
  input  logic [KAW-1:0] ker_addr,
  input  logic [EW-1:0]  ker_elem,
  input  fp32_t          ker_data,
  // input feature-map stream
  input  logic           in_valid,
  output logic           in_ready,
  input  fp32_t          in_data,
  // activation outputs
  output logic [R-1:0]   act_valid,
  output fp32_t          act_data [R],
  output logic [LW-1:0]  act_beat,
  output logic [ORW-1:0] act_r,
  output logic [OCW-1:0] act_c,
  // pooling outputs
  output logic [R-1:0]   pool_valid,
  output fp32_t          pool_data [R],
  output logic [LW-1:0]  pool_beat,
  output logic [ORW-1:0] pool_r,
  output logic [OCW-1:0] pool_c,
  // status
  output logic           stall_in,
  output logic           stall_out
);

  localparam int unsigned LAT_CU = FP_LAT * (tree_levels(KK) + 1);
  localparam int unsigned TAGW   = 1 + ORW + OCW;

  // ---------------- configuration registers ----------------
  logic [NW-1:0] n_q;
  logic [MW-1:0] m_q;
  logic          pool_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_q <= NW'(MAX_N); m_q <= MW'(MAX_M); pool_q <= 1'b1;
    end else if (start && !busy) begin
      n_q <= n_act; m_q <= m_act; pool_q <= pool_en;
    end
  end

  // Start pulse delayed by one cycle so that the sub-blocks see the new
  // configuration registers.
  logic start_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) start_q <= 1'b0;
    else        start_q <= start && !busy;
  end

  // ---------------- controller ----------------
  logic [RW-1:0] pos_r0;
  logic [CW-1:0] pos_c0, pos_c0div;
  logic [((K > 1) ? $clog2(K) : 1)-1:0] pos_r0mod, pos_c0mod;
  logic [NW-1:0] pos_i;
  logic          win_avail, pob_busy, pob_claim;
  logic          iss_valid, iss_rd_win, iss_first, iss_last, iss_last_pos;
  logic [GW-1:0] iss_grp, groups;
  logic          ctrl_busy, ctrl_done;

  conv_ctrl #(
    .K(K), .NCU(NCU), .MAX_N(MAX_N), .MAX_M(MAX_M), .IN_H(IN_H), .IN_W(IN_W),
    .MIN_DWELL(MIN_DWELL)
  ) u_ctrl (
    .clk, .rst_n,
    .start       (start_q),
    .n_act       (n_q),
    .m_act       (m_q),
    .busy        (ctrl_busy),
    .done        (ctrl_done),
    .pos_r0, .pos_c0, .pos_r0mod, .pos_c0mod, .pos_c0div, .pos_i,
    .win_avail,
    .pob_busy,
    .pob_claim,
    .iss_valid, .iss_rd_win, .iss_grp, .iss_first, .iss_last, .iss_last_pos,
    .stall_in, .stall_out,
    .groups
  );

  // ---------------- input memory hierarchy ----------------
  fp32_t win [KK];

  input_mem #(.K(K), .MAX_N(MAX_N), .IN_H(IN_H), .IN_W(IN_W)) u_inmem (
    .clk, .rst_n,
    .start    (start_q),
    .n_act    (n_q),
    .wr_valid (in_valid),
    .wr_ready (in_ready),
    .wr_data  (in_data),
    .rd_r0    (pos_r0),
    .rd_c0    (pos_c0),
    .rd_r0mod (pos_r0mod),
    .rd_c0mod (pos_c0mod),
    .rd_c0div (pos_c0div),
    .rd_i     (pos_i),
    .win_avail,
    .rd_en    (iss_rd_win),
    .win
  );

  // ---------------- side information along the pipeline ----------------
  typedef struct packed {
    logic            valid;
    logic [AGW-1:0]  grp;
    logic            first;
    logic            last;
    logic [TAGW-1:0] tag;     // {last position, conv row, conv column}
  } issue_tag_t;

  issue_tag_t tag_in;
  assign tag_in = '{
    valid: iss_valid,
    grp:   AGW'(iss_grp),
    first: iss_first,
    last:  iss_last,
    tag:   {iss_last_pos, ORW'(pos_r0), OCW'(pos_c0)}
  };

  localparam int unsigned D_ACC = 1 + LAT_CU;          // issue -> accumulator input
  localparam int unsigned D_PO  = D_ACC + FP_LAT;      // issue -> accumulator output
  issue_tag_t tag_d [D_PO];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < D_PO; s++) tag_d[s] <= '0;
    end else begin
      tag_d[0] <= tag_in;
      for (int s = 1; s < D_PO; s++) tag_d[s] <= tag_d[s-1];
    end
  end

  issue_tag_t at_cu, at_acc, at_po;
  assign at_cu  = tag_d[0];
  assign at_acc = tag_d[D_ACC-1];
  assign at_po  = tag_d[D_PO-1];

  // ---------------- computational units with kernel SRAM and accumulators ----
  logic [NCU-1:0] acc_v;
  fp32_t          acc_y [NCU];
  logic [NCU-1:0] po_mask;

  for (genvar cu = 0; cu < NCU; cu++) begin : g_cu
    fp32_t ker [KK];
    logic  cu_v;
    fp32_t cu_y;
    logic [AGW-1:0] acc_g;

    kernel_sram #(.K(K), .DEPTH(KDEP)) u_ksram (
      .clk,
      .wr_en   (ker_we && ker_cu == CUW'(cu)),
      .wr_addr (ker_addr),
      .wr_elem (ker_elem),
      .wr_data (ker_data),
      .rd_en   (iss_valid),
      .rd_addr (KAW'(int'(pos_i) * MG + int'(iss_grp))),
      .rd_data (ker)
    );

    cu #(.K(K)) u_cu (
      .clk, .rst_n,
      .in_valid (at_cu.valid),
      .win      (win),
      .ker      (ker),
      .out_valid(cu_v),
      .y        (cu_y)
    );

    acc_bank #(.MG(MG)) u_acc (
      .clk, .rst_n,
      .in_valid (cu_v),
      .in_grp   (at_acc.grp),
      .in_first (at_acc.first),
      .in_last  (at_acc.last),
      .in_data  (cu_y),
      .out_valid(acc_v[cu]),
      .out_grp  (acc_g),
      .out_data (acc_y[cu])
    );

    assign po_mask[cu] = (int'(at_po.grp) * NCU + cu) < int'(m_q);
  end

  // ---------------- parallel-out buffer ----------------
  fp32_t           po_data [R];
  logic [R-1:0]    po_valid;
  logic            po_last;
  logic [TAGW-1:0] po_tag;
  logic [$clog2((MAX_M + R - 1) / R > 1 ? (MAX_M + R - 1) / R : 2)-1:0] po_beat;

  po_buffer #(.NCU(NCU), .MAX_M(MAX_M), .R(R), .TAGW(TAGW)) u_pob (
    .clk, .rst_n,
    .m_act    (m_q),
    .claim    (pob_claim),
    .busy     (pob_busy),
    .wr_valid (acc_v[0]),
    .wr_grp   (at_po.grp),
    .wr_mask  (po_mask),
    .wr_data  (acc_y),
    .wr_last  (int'(at_po.grp) + 1 == int'(groups)),
    .wr_tag   (at_po.tag),
    .out_valid(po_valid),
    .out_data (po_data),
    .out_beat (po_beat),
    .out_last (po_last),
    .out_tag  (po_tag)
  );

  // ---------------- activation and pooling ----------------
  act_pool #(.R(R), .P(P), .OH(OH), .OW(OW), .MAX_M(MAX_M)) u_actpool (
    .clk, .rst_n,
    .clear    (start_q),
    .pool_en  (pool_q),
    .in_valid (po_valid),
    .in_data  (po_data),
    .in_beat  (LW'(po_beat)),
    .in_r     (po_tag[OCW +: ORW]),
    .in_c     (po_tag[0 +: OCW]),
    .act_valid, .act_data, .act_beat, .act_r, .act_c,
    .pool_valid, .pool_data, .pool_beat, .pool_r, .pool_c
  );

  // ---------------- completion ----------------
  // The last beat of the last position leaves the buffer; ReLU (1) and the
  // pooling unit (4) finish it 5 cycles later.
  localparam int unsigned D_DONE = 1 + 2 * FP_LAT;
  logic [D_DONE-1:0] done_sr;
  logic              run_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      done_sr <= '0;
      run_q   <= 1'b0;
    end else begin
      done_sr <= {done_sr[D_DONE-2:0], po_last && po_tag[TAGW-1]};
      if (start && !busy) run_q <= 1'b1;
      else if (done_sr[D_DONE-1]) run_q <= 1'b0;
    end
  end
  assign done = done_sr[D_DONE-1];
  assign busy = run_q;

  // Checks start one cycle after reset is released (a flop, so the reset
  // net itself is only used asynchronously).
  logic chk_en;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) chk_en <= 1'b0;
    else        chk_en <= 1'b1;
  end

  a_tree_aligned: assert property (@(posedge clk) disable iff (!chk_en)
    g_cu[0].cu_v == at_acc.valid);

endmodule
