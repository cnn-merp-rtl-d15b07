// input_mem: input memory hierarchy. It turns a stream of single input
// elements into one complete k x k input window per read.
//
// Only k rows of every input feature map are kept on chip. The element at
// (row r, column c) of map i is stored in bank (r mod K, c mod K) at address
// i*CB + c div K, CB = ceil(IN_W/K), so the K*K elements of any K x K window
// lie in K*K different banks and the whole window is read in one cycle. Each
// new element replaces the one K rows above it, which the window has already
// left, so once the first K-1 rows are in, only one new element per window
// position and map is loaded. Because the window moves while the bank
// positions are fixed, the bank outputs are rotated back into window order:
// window element (u,v) comes from bank ((u + r0) mod K, (v + c0) mod K).
// Bank mapping, rotation and the one-element-per-cycle write path follow the
// paper (input memory hierarchy figure); addresses, flow control and the
// element order are this design's choices.
//
// Write side (bank router): elements arrive on wr_valid/wr_ready/wr_data in
// the order row, column, map (map index fastest), only for maps 0..n_act-1,
// one per cycle. An element is accepted only when the element it overwrites
// is no longer needed by the reader: row r < K, or the reader is past window
// position (r-K, min(c, OW-1)). The last element of the stream is the one
// the last window needs, so the reader never has to finish first.
// Read side: the controller gives its current window position (r0,c0), their
// residues mod K, c0 div K and the map index; win_avail says whether that
// window is fully written. rd_en loads the window register win[] (row-major),
// valid the next cycle and held until the next rd_en. start (pulse) rewinds
// the write pointer for a new layer.
module input_mem
  import cnn_merp_pkg::*;
#(
  parameter int unsigned K     = 5,
  parameter int unsigned MAX_N = 48,
  parameter int unsigned IN_H  = 31,
  parameter int unsigned IN_W  = 31,
  localparam int unsigned KK   = K * K,
  localparam int unsigned OW   = IN_W - K + 1,
  localparam int unsigned CB   = (IN_W + K - 1) / K,
  localparam int unsigned DEPTH = MAX_N * CB,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int unsigned RW   = $clog2(IN_H + 1),
  localparam int unsigned CW   = $clog2(IN_W + 1),
  localparam int unsigned KW   = (K > 1) ? $clog2(K) : 1,
  localparam int unsigned NW   = $clog2(MAX_N + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [NW-1:0] n_act,
  // write stream from external memory
  input  logic          wr_valid,
  output logic          wr_ready,
  input  fp32_t         wr_data,
  // reader position
  input  logic [RW-1:0] rd_r0,
  input  logic [CW-1:0] rd_c0,
  input  logic [KW-1:0] rd_r0mod,
  input  logic [KW-1:0] rd_c0mod,
  input  logic [CW-1:0] rd_c0div,
  input  logic [NW-1:0] rd_i,
  output logic          win_avail,
  input  logic          rd_en,
  output fp32_t         win [KK]
);

  // ---------------- bank router: write pointer ----------------
  logic [RW-1:0] w_r;
  logic [CW-1:0] w_c, w_cdiv;
  logic [KW-1:0] w_rmod, w_cmod;
  logic [NW-1:0] w_i;
  logic          w_end;

  assign w_end = (w_r == RW'(IN_H));

  // Overwrite protection: compare reader (r0,c0) with (w_r-K, min(w_c,OW-1)).
  logic [RW-1:0] prot_r;
  logic [CW-1:0] prot_c;
  logic          safe;
  always_comb begin
    prot_r = w_r - RW'(K);
    prot_c = (w_c > CW'(OW - 1)) ? CW'(OW - 1) : w_c;
    safe   = (w_r < RW'(K)) ||
             (rd_r0 > prot_r) || (rd_r0 == prot_r && rd_c0 > prot_c);
  end

  assign wr_ready = !start && !w_end && safe;

  logic wr_fire;
  assign wr_fire = wr_valid && wr_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_r <= '0; w_c <= '0; w_cdiv <= '0; w_rmod <= '0; w_cmod <= '0; w_i <= '0;
    end else if (start) begin
      w_r <= '0; w_c <= '0; w_cdiv <= '0; w_rmod <= '0; w_cmod <= '0; w_i <= '0;
    end else if (wr_fire) begin
      if (w_i + 1'b1 < n_act) begin
        w_i <= w_i + 1'b1;
      end else begin
        w_i <= '0;
        if (w_c == CW'(IN_W - 1)) begin
          w_c    <= '0;
          w_cdiv <= '0;
          w_cmod <= '0;
          w_r    <= w_r + 1'b1;
          w_rmod <= (w_rmod == KW'(K - 1)) ? '0 : w_rmod + 1'b1;
        end else begin
          w_c <= w_c + 1'b1;
          if (w_cmod == KW'(K - 1)) begin
            w_cmod <= '0;
            w_cdiv <= w_cdiv + 1'b1;
          end else begin
            w_cmod <= w_cmod + 1'b1;
          end
        end
      end
    end
  end

  logic [AW-1:0] w_addr;
  assign w_addr = AW'(w_i * CB + w_cdiv);

  // ---------------- availability of the requested window ----------------
  // The window (r0,c0) of map i needs element (r0+K-1, c0+K-1, i) written,
  // i.e. the write pointer is lexicographically beyond it.
  logic [RW:0] need_r;
  logic [CW:0] need_c;
  always_comb begin
    need_r    = {1'b0, rd_r0} + (RW+1)'(K - 1);
    need_c    = {1'b0, rd_c0} + (CW+1)'(K - 1);
    win_avail = w_end ||
                ({1'b0, w_r} > need_r) ||
                ({1'b0, w_r} == need_r && ({1'b0, w_c} > need_c ||
                                           ({1'b0, w_c} == need_c && w_i > rd_i)));
  end

  // ---------------- banks ----------------
  fp32_t bank_q [K][K];
  logic [KW-1:0] rot_r, rot_c;   // residues of the last read, for rotation

  for (genvar a = 0; a < K; a++) begin : g_row
    for (genvar b = 0; b < K; b++) begin : g_col
      logic [AW-1:0] r_addr;
      // Column of this bank inside the window: c0 + ((b - c0) mod K).
      assign r_addr = AW'(int'(rd_i) * CB + int'(rd_c0div) + ((KW'(b) < rd_c0mod) ? 1 : 0));
      input_bank #(.DEPTH(DEPTH)) u_bank (
        .clk,
        .wr_en  (wr_fire && w_rmod == KW'(a) && w_cmod == KW'(b)),
        .wr_addr(w_addr),
        .wr_data(wr_data),
        .rd_en  (rd_en),
        .rd_addr(r_addr),
        .rd_data(bank_q[a][b])
      );
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rot_r <= '0;
      rot_c <= '0;
    end else if (rd_en) begin
      rot_r <= rd_r0mod;
      rot_c <= rd_c0mod;
    end
  end

  // ---------------- conversion of coordinates ----------------
  always_comb begin
    for (int u = 0; u < K; u++) begin
      for (int v = 0; v < K; v++) begin
        logic [KW-1:0] ba, bb;
        ba = KW'((u + int'(rot_r)) % K);
        bb = KW'((v + int'(rot_c)) % K);
        win[u*K + v] = bank_q[ba][bb];
      end
    end
  end

endmodule
