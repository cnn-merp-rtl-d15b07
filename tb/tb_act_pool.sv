// tb_act_pool: self-checking test of the activation and pooling stage with
// R = 2 lanes, P = 2, a 4 x 4 conv output and 3 output maps (so the second
// beat has only lane 0 valid). Beats arrive as the parallel-out buffer sends
// them. Every activated value must be max(0, x) one cycle later with its
// beat and position; every pooled value must be the average of the four
// activated values of its window. A second layer with pool_en low must give
// activation outputs but no pooled outputs. Output counts are checked.
module tb_act_pool;
  import tb_fp_pkg::*;
  localparam int R = 2, P = 2, OH = 4, OW = 4, MAX_M = 4, M = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic         clear, pool_en;
  logic [R-1:0] in_valid, act_valid, pool_valid;
  logic [31:0]  in_data [R], act_data [R], pool_data [R];
  logic         in_beat, act_beat, pool_beat;
  logic [2:0]   in_r, in_c, act_r, act_c, pool_r, pool_c;
  int checks = 0, failures = 0, n_act_out = 0, n_pool_out = 0;

  act_pool #(.R(R), .P(P), .OH(OH), .OW(OW), .MAX_M(MAX_M)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] actv [MAX_M][OH][OW];
  logic [31:0] e_act [R];
  logic [R-1:0] e_v;
  logic e_beat; logic [2:0] e_r, e_c;

  always @(posedge clk) begin
    e_v <= in_valid; e_beat <= in_beat; e_r <= in_r; e_c <= in_c;
    for (int g = 0; g < R; g++) e_act[g] <= in_data[g][31] ? 32'h0 : in_data[g];
    if (rst_n) begin
      checks++;
      if (act_valid !== e_v) begin failures++; $display("act valid"); end
      for (int g = 0; g < R; g++) if (e_v[g]) begin
        n_act_out++; checks++;
        if (act_data[g] !== e_act[g] || act_beat !== e_beat || act_r !== e_r || act_c !== e_c) begin
          failures++; if (failures < 10) $display("act lane %0d got %h exp %h", g, act_data[g], e_act[g]);
        end
      end
      for (int g = 0; g < R; g++) if (pool_valid[g]) begin
        int ch, r, c;
        logic [31:0] s, e;
        ch = int'(pool_beat) * R + g; r = int'(pool_r) * P; c = int'(pool_c) * P;
        s = fadd(fadd(fadd(fadd(32'h0, actv[ch][r][c]), actv[ch][r][c+1]), actv[ch][r+1][c]),
                 actv[ch][r+1][c+1]);
        e = fmul(s, 32'h3e80_0000);
        n_pool_out++; checks++;
        if (pool_data[g] !== e) begin
          failures++; if (failures < 10) $display("pool ch %0d got %h exp %h", ch, pool_data[g], e);
        end
      end
    end
  end

  initial begin
    clear = 0; pool_en = 1; in_valid = 0; in_beat = 0; in_r = 0; in_c = 0;
    foreach (in_data[g]) in_data[g] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int layer = 0; layer < 2; layer++) begin
      pool_en = (layer == 0);
      clear = 1; @(posedge clk); #1; clear = 0;
      for (int r = 0; r < OH; r++)
        for (int c = 0; c < OW; c++) begin
          for (int b = 0; b < (M + R - 1) / R; b++) begin
            in_beat = 1'(b); in_r = 3'(r); in_c = 3'(c);
            for (int g = 0; g < R; g++) begin
              in_valid[g] = (b * R + g < M);
              in_data[g] = frand(4);
              if (b * R + g < M) actv[b*R+g][r][c] = in_data[g][31] ? 32'h0 : in_data[g];
            end
            @(posedge clk); #1;
          end
          in_valid = 0;
          repeat ($urandom_range(1, 3)) @(posedge clk);
          #1;
        end
      repeat (10) @(posedge clk);
      #1;
    end
    checks++;
    if (n_act_out != 2 * M * OH * OW || n_pool_out != M * (OH / P) * (OW / P)) begin
      failures++; $display("counts act=%0d pool=%0d", n_act_out, n_pool_out);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
