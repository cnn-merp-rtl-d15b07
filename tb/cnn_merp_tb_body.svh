// cnn_merp_tb_body.svh: end-to-end checking environment for cnn_merp, shared
// by the reduced-size, the default-size and the AlexNet layer 3-5 testbench.
// The including module declares the size parameters (K, NCU, MAX_N, MAX_M,
// IN_H, IN_W, R, P, MIN_DWELL), the run list (NRUNS, run_n, run_m,
// run_pool, run_gap) and its own watchdog (WATCHDOG cycles), and
// instantiates the design as `dut` on the signals declared here.
//
// For every run it draws random input maps and kernels, loads the kernels
// through the kernel port, starts the layer, streams the input maps in row,
// column, map order (with random gaps of probability run_gap percent) and
// compares every activation and pooling output with a reference computed
// here: conv output = sum over input maps (in order) of the K x K dot
// product (reduced in the adder tree's pairing order), ReLU, then average of
// P x P neighbours. It checks output counts, and that the busy cycles with
// neither stall output raised lie between positions * n * max(ceil(m/NCU),
// MIN_DWELL) and that figure plus a small fill / drain allowance. It uses
// only the top-level ports. It
// counts how often each mechanism occurred: input stall, output-buffer
// stall, reduced map counts (logic-based reconfiguration), group padding to
// MIN_DWELL, pooling disabled, back-to-back layers.

  import tb_fp_pkg::*;

  localparam int KK   = K * K;
  localparam int OH   = IN_H - K + 1;
  localparam int OW   = IN_W - K + 1;
  localparam int MG   = (MAX_M + NCU - 1) / NCU;
  localparam int MAXL = (MAX_M + R - 1) / R;
  // Unstalled busy cycles allowed beyond the issue cycles: the start cycle,
  // the CU / accumulator pipeline, the last drain of the output buffer and
  // the ReLU / pooling latency.
  localparam int ACTIVE_SLACK = 40 + MAXL;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, pool_en, busy, done, ker_we, in_valid, in_ready, stall_in, stall_out;
  logic [$clog2(MAX_N + 1)-1:0] n_act;
  logic [$clog2(MAX_M + 1)-1:0] m_act;
  logic [((NCU > 1) ? $clog2(NCU) : 1)-1:0] ker_cu;
  logic [(((MAX_N * MG) > 1) ? $clog2(MAX_N * MG) : 1)-1:0] ker_addr;
  logic [((KK > 1) ? $clog2(KK) : 1)-1:0] ker_elem;
  logic [31:0] ker_data, in_data;
  logic [R-1:0] act_valid, pool_valid;
  logic [31:0]  act_data [R], pool_data [R];
  logic [((MAXL > 1) ? $clog2(MAXL) : 1)-1:0] act_beat, pool_beat;
  logic [$clog2(OH + 1)-1:0] act_r, pool_r;
  logic [$clog2(OW + 1)-1:0] act_c, pool_c;

  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------- reference model ----------------
  logic [31:0] img  [MAX_N][IN_H][IN_W];
  logic [31:0] kern [MAX_M][MAX_N][KK];
  logic [31:0] act_ref [MAX_M][OH][OW];
  bit          act_seen [MAX_M][OH][OW];

  function automatic logic [31:0] dot_tree(input int o, input int i, input int r0, input int c0);
    logic [31:0] v [KK];
    int w;
    for (int u = 0; u < K; u++)
      for (int x = 0; x < K; x++)
        v[u*K+x] = fmul(img[i][r0+u][c0+x], kern[o][i][u*K+x]);
    // Pairwise reduction, level by level, odd operand carried up.
    w = KK;
    while (w > 1) begin
      for (int e = 0; e < (w + 1) / 2; e++)
        v[e] = (2 * e + 1 < w) ? fadd(v[2*e], v[2*e+1]) : v[2*e];
      w = (w + 1) / 2;
    end
    return v[0];
  endfunction

  task automatic build_ref(input int n, input int m);
    for (int o = 0; o < m; o++)
      for (int r = 0; r < OH; r++)
        for (int c = 0; c < OW; c++) begin
          logic [31:0] s;
          s = 32'h0;
          for (int i = 0; i < n; i++) s = fadd(s, dot_tree(o, i, r, c));
          act_ref[o][r][c] = s[31] ? 32'h0 : s;
          act_seen[o][r][c] = 0;
        end
  endtask

  // ---------------- output checking ----------------
  int n_act_out = 0, n_pool_out = 0, cur_m = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      for (int g = 0; g < R; g++) begin
        if (act_valid[g]) begin
          int o;
          o = int'(act_beat) * R + g;
          n_act_out++;
          chk(o < cur_m, "act map in range");
          if (o < cur_m) begin
            chk(!act_seen[o][act_r][act_c], "act output once");
            act_seen[o][act_r][act_c] = 1;
            checks++;
            if (act_data[g] !== act_ref[o][act_r][act_c]) begin
              failures++;
              if (failures < 20)
                $display("FAIL act map %0d (%0d,%0d): got %h expected %h", o, act_r, act_c,
                         act_data[g], act_ref[o][act_r][act_c]);
            end
          end
        end
        if (pool_valid[g]) begin
          int o, r, c;
          logic [31:0] s, e;
          o = int'(pool_beat) * R + g; r = int'(pool_r) * P; c = int'(pool_c) * P;
          n_pool_out++;
          s = 32'h0;
          for (int u = 0; u < P; u++)
            for (int w = 0; w < P; w++) s = fadd(s, act_ref[o][r+u][c+w]);
          e = fmul(s, fp32_recip_ref(P * P));
          checks++;
          if (pool_data[g] !== e) begin
            failures++;
            if (failures < 20)
              $display("FAIL pool map %0d (%0d,%0d): got %h expected %h", o, pool_r, pool_c,
                       pool_data[g], e);
          end
        end
      end
    end
  end

  function automatic logic [31:0] fp32_recip_ref(input int n);
    return r2f(1.0 / n);
  endfunction

  // ---------------- mechanism counters ----------------
  int ev_stall_in = 0, ev_stall_out = 0, ev_reduced = 0, ev_padded = 0, ev_nopool = 0,
      ev_back2back = 0, active = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (stall_in)  ev_stall_in++;
      if (stall_out) ev_stall_out++;
      if (busy && !stall_in && !stall_out) active++;
    end
  end

  // ---------------- stimulus ----------------
  task automatic load_kernels(input int n, input int m);
    for (int o = 0; o < m; o++)
      for (int i = 0; i < n; i++)
        for (int e = 0; e < KK; e++) begin
          ker_we = 1; ker_cu = $bits(ker_cu)'(o % NCU);
          ker_addr = $bits(ker_addr)'(i * MG + o / NCU);
          ker_elem = $bits(ker_elem)'(e); ker_data = kern[o][i][e];
          @(posedge clk); #1;
        end
    ker_we = 0;
  endtask

  task automatic stream(input int n, input int gap);
    for (int r = 0; r < IN_H; r++)
      for (int c = 0; c < IN_W; c++)
        for (int i = 0; i < n; i++) begin
          while (gap > 0 && $urandom_range(0, 99) < gap) begin
            in_valid = 0; @(posedge clk); #1;
          end
          in_valid = 1; in_data = img[i][r][c];
          @(posedge clk);
          while (!in_ready) @(posedge clk);
          #1;
        end
    in_valid = 0;
  endtask

  initial begin
    start = 0; pool_en = 1; n_act = '0; m_act = '0; ker_we = 0; ker_cu = '0; ker_addr = '0;
    ker_elem = '0; ker_data = 0; in_valid = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1; #1;
    for (int run = 0; run < NRUNS; run++) begin
      int n, m, g, dw, t0, t1, act0, pool0, iss0;
      n = run_n[run]; m = run_m[run];
      g = (m + NCU - 1) / NCU;
      for (int i = 0; i < n; i++)
        for (int r = 0; r < IN_H; r++)
          for (int c = 0; c < IN_W; c++)
            // zero border as for a padded layer, random inside
            img[i][r][c] = (r == 0 || c == 0) ? 32'h0 : frand(3);
      for (int o = 0; o < m; o++)
        for (int i = 0; i < n; i++)
          for (int e = 0; e < KK; e++) kern[o][i][e] = frand(3);
      build_ref(n, m);
      load_kernels(n, m);
      cur_m = m;
      act0 = n_act_out; pool0 = n_pool_out; iss0 = active;
      n_act = $bits(n_act)'(n); m_act = $bits(m_act)'(m); pool_en = run_pool[run];
      if (n < MAX_N || m < MAX_M) ev_reduced++;
      if (g < MIN_DWELL) ev_padded++;
      if (!run_pool[run]) ev_nopool++;
      if (run > 0) ev_back2back++;
      chk(!busy, "idle before start");
      start = 1; @(posedge clk); #1; start = 0;
      t0 = cyc;
      chk(busy, "busy after start");
      stream(n, run_gap[run]);
      while (!done) @(posedge clk);
      #1;
      t1 = cyc;
      $display("run %0d: n=%0d m=%0d pool=%0d: %0d cycles (%0d issue cycles minimum)", run, n, m,
               run_pool[run], t1 - t0, OH * OW * n * ((g > MIN_DWELL) ? g : MIN_DWELL));
      chk(t1 - t0 >= OH * OW * n * ((g > MIN_DWELL) ? g : MIN_DWELL), "cycle count lower bound");
      // Busy cycles without a stall: the issue cycles plus a short fill and drain.
      dw = (g > MIN_DWELL) ? g : MIN_DWELL;
      $display("run %0d: %0d unstalled busy cycles beyond the %0d issue cycles", run,
               active - iss0 - OH * OW * n * dw, OH * OW * n * dw);
      chk(active - iss0 >= OH * OW * n * dw, "unstalled busy cycles cover every issue");
      chk(active - iss0 <= OH * OW * n * dw + ACTIVE_SLACK, "unstalled busy cycles beyond issue cycles");
      chk(n_act_out - act0 == OH * OW * m, $sformatf("act output count %0d", n_act_out - act0));
      chk(n_pool_out - pool0 == (run_pool[run] ? (OH / P) * (OW / P) * m : 0), "pool output count");
      repeat (3) @(posedge clk);
      #1;
      chk(!busy, "idle after done");
    end
    $display("mechanisms: stall_in=%0d stall_out=%0d reduced_maps=%0d padded_groups=%0d no_pool=%0d back_to_back=%0d",
             ev_stall_in, ev_stall_out, ev_reduced, ev_padded, ev_nopool, ev_back2back);
    chk(ev_stall_in > 0, "input stall seen");
    chk(ev_stall_out > 0 || !EXPECT_ALL, "output-buffer stall seen");
    chk(ev_reduced > 0 || !EXPECT_ALL, "reduced map counts seen");
    chk(ev_padded > 0 || !EXPECT_ALL, "group padding seen");
    chk(ev_nopool > 0 || !EXPECT_ALL, "pooling disabled seen");
    chk(ev_back2back > 0 || !EXPECT_ALL, "back-to-back layers seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
