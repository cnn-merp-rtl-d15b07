// tb_conv_ctrl: self-checking test of the data-flow controller with K = 3,
// 2 CUs, up to 3 input and 5 output maps on a 5 x 5 input (3 x 3 positions).
// For several (n_act, m_act) settings it checks that the issued
// (position, map, group) sequence is exactly the nested loop
// position > input map > output group with bounds n_act and
// ceil(m_act/2), the first/last/last-position flags, the reader coordinates
// and residues, window loads only on group 0, no issue while stalled, and
// that a run without stalls takes exactly positions * n_act *
// max(groups, 2) cycles. Runs with a random win_avail and a buffer that
// stays busy for a while after each claim must show both kinds of stall.
module tb_conv_ctrl;
  localparam int K = 3, NCU = 2, MAX_N = 3, MAX_M = 5, IN_H = 5, IN_W = 5;
  localparam int OH = 3, OW = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       start, busy, done, win_avail, pob_busy, pob_claim;
  logic [1:0] n_act, pos_i;
  logic [2:0] m_act;
  logic [2:0] pos_r0, pos_c0, pos_c0div;
  logic [1:0] pos_r0mod, pos_c0mod;
  logic       iss_valid, iss_rd_win, iss_first, iss_last, iss_last_pos, stall_in, stall_out;
  logic [1:0] iss_grp, groups;
  int checks = 0, failures = 0, n_stall_in = 0, n_stall_out = 0;

  conv_ctrl #(.K(K), .NCU(NCU), .MAX_N(MAX_N), .MAX_M(MAX_M), .IN_H(IN_H), .IN_W(IN_W),
              .MIN_DWELL(2)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("fail: %s at %0t", what, $time); end
  endtask

  int busy_left;
  bit random_mode;
  always @(posedge clk) begin
    if (random_mode) begin
      if (pob_claim) busy_left <= $urandom_range(1, 30);
      else if (busy_left > 0) busy_left <= busy_left - 1;
    end
  end
  assign pob_busy = random_mode && busy_left > 0;

  task automatic run(input int n, input int m, input bit rnd);
    int g, dwell, cycles;
    int er0, ec0, ei, ej;
    g = (m + NCU - 1) / NCU;
    dwell = (g > 2) ? g : 2;
    n_act = 2'(n); m_act = 3'(m); random_mode = rnd; busy_left = 0;
    start = 1; @(posedge clk); #1; start = 0;
    er0 = 0; ec0 = 0; ei = 0; ej = 0; cycles = 0;
    while (!done) begin
      win_avail = rnd ? ($urandom_range(0, 2) != 0) : 1'b1;
      #1;
      if (stall_in) n_stall_in++;
      if (stall_out) n_stall_out++;
      if (stall_in || stall_out) chk(!iss_valid && !iss_rd_win, "issue while stalled");
      chk(int'(pos_r0) == er0 && int'(pos_c0) == ec0 && int'(pos_i) == ei, "reader position");
      chk(int'(pos_r0mod) == er0 % K && int'(pos_c0mod) == ec0 % K && int'(pos_c0div) == ec0 / K,
          "residues");
      if (!stall_in && !stall_out) begin
        chk(iss_valid == (ej < g), "issue valid");
        chk(iss_rd_win == (ej == 0), "window load");
        if (iss_valid)
          chk(int'(iss_grp) == ej && iss_first == (ei == 0) && iss_last == (ei == n - 1) &&
              iss_last_pos == (er0 == OH - 1 && ec0 == OW - 1), "issue tags");
        chk(pob_claim == (ej == 0 && ei == n - 1), "claim");
        ej++;
        if (ej == dwell) begin
          ej = 0; ei++;
          if (ei == n) begin
            ei = 0; ec0++;
            if (ec0 == OW) begin ec0 = 0; er0++; end
          end
        end
      end
      @(posedge clk); #1;
      cycles++;
    end
    chk(er0 == OH && ec0 == 0, "all positions issued");
    if (!rnd) chk(cycles == OH * OW * n * dwell, $sformatf("cycle count %0d", cycles));
    #1;
    chk(!busy, "idle after done");
  endtask

  initial begin
    start = 0; n_act = 3; m_act = 5; win_avail = 1; random_mode = 0; busy_left = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    run(3, 5, 0);   // full size: 3 groups
    run(2, 4, 0);   // reduced maps: 2 groups
    run(1, 1, 0);   // one group, padded to 2 cycles
    run(3, 5, 1);
    run(2, 3, 1);
    chk(n_stall_in > 0 && n_stall_out > 0, "both stall kinds seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
