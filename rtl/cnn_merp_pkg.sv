// cnn_merp_pkg: types and helpers shared by the CNN-MERP forward-propagation
// datapath. All arithmetic is IEEE-754 single precision (32-bit float), as the
// processor targets training, which needs 32-bit operands. The helpers here
// are purely combinational field accessors used by the floating-point units.
package cnn_merp_pkg;

  typedef logic [31:0] fp32_t;

  // Field view of a single-precision number.
  typedef struct packed {
    logic       sign;
    logic [7:0] exp;
    logic [22:0] man;
  } fp32_fields_t;

  localparam fp32_t FP32_ZERO = 32'h0000_0000;

  // Latency of each floating-point operator (two pipeline stages).
  localparam int unsigned FP_LAT = 2;

  // ceil(log2(n)) for n >= 1, used for adder-tree depth and widths.
  function automatic int unsigned clog2c(input int unsigned n);
    int unsigned r;
    r = 0;
    while ((1 << r) < n) r++;
    return r;
  endfunction

  // Number of adder-tree levels needed to reduce n operands to one
  // by pairing neighbours at every level.
  function automatic int unsigned tree_levels(input int unsigned n);
    int unsigned c, l;
    c = n; l = 0;
    while (c > 1) begin c = (c + 1) / 2; l++; end
    return l;
  endfunction

  // Number of operands left after level l of such a tree (level 0 = inputs).
  function automatic int unsigned tree_width(input int unsigned n, input int unsigned l);
    int unsigned c;
    c = n;
    for (int unsigned k = 0; k < l; k++) c = (c + 1) / 2;
    return c;
  endfunction

  // Single-precision value of 1/n for an integer n >= 1, rounded to nearest
  // even. Used for the 1/(p*p) scale of average pooling.
  function automatic fp32_t fp32_recip(input int unsigned n);
    int unsigned e;
    longint unsigned nn, num, q, r;
    logic [24:0] m;
    logic        g, st;
    nn = 64'(n);
    e = 0;
    while ((64'd1 << (e + 1)) <= nn) e++;         // 2^e <= n < 2^(e+1)
    if ((64'd1 << e) == nn)
      return {1'b0, 8'(127 - e), 23'd0};
    // 2^(e+1)/n lies in (1,2): 24 significand bits plus a guard bit.
    num = 64'd1 << (e + 1 + 24);
    q   = num / nn;
    r   = num % nn;
    g   = q[0];
    st  = (r != 0);
    m   = {1'b0, q[24:1]} + {24'd0, g && (st || q[1])};
    if (q[63:25] != 0 || m[24:23] != 2'b01)     // cannot happen for n >= 1
      return 32'h7fc00000;
    return {1'b0, 8'(127 - e - 1), m[22:0]};
  endfunction

endpackage
