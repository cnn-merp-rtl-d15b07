// tb_pool_unit: self-checking test of one pooling unit with P = 2 on a
// 5 x 5 conv output (the last row and column lie outside any whole window
// and must be ignored) for 3 lane-local maps. Elements arrive in raster
// order, all maps of one position together, with small random gaps; two
// layers are run back to back with clear in between. Every pooled output
// must equal the reference average (sum in arrival order, times 0.25) and
// carry the right map and pooled position; the count of outputs is checked.
module tb_pool_unit;
  import tb_fp_pkg::*;
  localparam int P = 2, OH = 5, OW = 5, MAXL = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        clear, in_valid, out_valid;
  logic [31:0] in_data, out_data;
  logic [1:0]  in_idx, out_idx;
  logic [2:0]  in_r, in_c, out_r, out_c;
  int checks = 0, failures = 0, seen = 0;

  pool_unit #(.P(P), .OH(OH), .OW(OW), .MAXL(MAXL)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] sums [MAXL][OH/P][OW/P];
  logic [31:0] expq [$];

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      logic [31:0] e;
      checks++; seen++;
      e = fmul(sums[out_idx][out_r][out_c], 32'h3e80_0000);
      if (out_data !== e) begin
        failures++;
        if (failures < 10) $display("pool (%0d,%0d,%0d): got %h expected %h", out_idx, out_r, out_c, out_data, e);
      end
    end
  end

  initial begin
    clear = 0; in_valid = 0; in_data = 0; in_idx = 0; in_r = 0; in_c = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int layer = 0; layer < 2; layer++) begin
      clear = 1; @(posedge clk); #1; clear = 0;
      for (int r = 0; r < OH; r++)
        for (int c = 0; c < OW; c++) begin
          for (int l = 0; l < MAXL; l++) begin
            in_valid = 1; in_idx = 2'(l); in_r = 3'(r); in_c = 3'(c);
            in_data = (layer == 1 && l == 1) ? 32'h0 : frand(4);
            in_data[31] = 0;
            if (r < OH / P * P && c < OW / P * P) begin
              if (r % P == 0 && c % P == 0) sums[l][r/P][c/P] = in_data;
              else sums[l][r/P][c/P] = fadd(sums[l][r/P][c/P], in_data);
            end
            @(posedge clk); #1;
          end
          in_valid = 0;
          repeat ($urandom_range(0, 2)) @(posedge clk);
          #1;
        end
      repeat (8) @(posedge clk);
      #1;
    end
    checks++;
    if (seen != 2 * MAXL * (OH / P) * (OW / P)) begin
      failures++; $display("output count %0d", seen);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
