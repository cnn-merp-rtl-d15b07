// tb_input_mem: self-checking test of the input memory hierarchy with
// K = 3, up to 3 maps of 6 x 7 elements. A random-rate writer streams the
// maps in row, column, map order; a reader walks all window positions in
// raster order and, for each, all active maps, waiting for win_avail and
// sometimes pausing. Every window read must equal the K x K block of the
// reference maps at that position (this checks bank mapping, addresses,
// rotation and overwrite protection). Two layers with different n_act run
// back to back; the writer must have been held back (overwrite protection)
// and the reader must have waited (availability) at least once.
module tb_input_mem;
  localparam int K = 3, MAX_N = 3, IN_H = 6, IN_W = 7;
  localparam int OH = IN_H - K + 1, OW = IN_W - K + 1;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        start, wr_valid, wr_ready, win_avail, rd_en;
  logic [1:0]  n_act, rd_i;
  logic [31:0] wr_data;
  logic [2:0]  rd_r0, rd_c0, rd_c0div;
  logic [1:0]  rd_r0mod, rd_c0mod;
  logic [31:0] win [K*K];
  int checks = 0, failures = 0, held = 0, waited = 0;

  input_mem #(.K(K), .MAX_N(MAX_N), .IN_H(IN_H), .IN_W(IN_W)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] img [MAX_N][IN_H][IN_W];
  bit          wdone;

  // Writer.
  task automatic writer(input int n);
    for (int r = 0; r < IN_H; r++)
      for (int c = 0; c < IN_W; c++)
        for (int i = 0; i < n; i++) begin
          wr_valid = ($urandom_range(0, 3) != 0);
          while (!wr_valid) begin
            @(posedge clk); #1; wr_valid = ($urandom_range(0, 3) != 0);
          end
          wr_data = img[i][r][c];
          @(posedge clk);
          while (!wr_ready) begin held++; @(posedge clk); end
          #1;
        end
    wr_valid = 0;
    wdone = 1;
  endtask

  task automatic reader(input int n);
    for (int r0 = 0; r0 < OH; r0++)
      for (int c0 = 0; c0 < OW; c0++)
        for (int i = 0; i < n; i++) begin
          rd_r0 = 3'(r0); rd_c0 = 3'(c0); rd_r0mod = 2'(r0 % K); rd_c0mod = 2'(c0 % K);
          rd_c0div = 3'(c0 / K); rd_i = 2'(i);
          #1;
          while (!win_avail) begin waited++; @(posedge clk); #1; end
          rd_en = 1;
          @(posedge clk); #1;
          rd_en = 0;
          for (int u = 0; u < K; u++)
            for (int v = 0; v < K; v++) begin
              checks++;
              if (win[u*K+v] !== img[i][r0+u][c0+v]) begin
                failures++;
                if (failures < 10)
                  $display("win (%0d,%0d) map %0d el (%0d,%0d): got %h exp %h", r0, c0, i, u, v,
                           win[u*K+v], img[i][r0+u][c0+v]);
              end
            end
          repeat ($urandom_range(0, 6)) @(posedge clk);
          #1;
        end
  endtask

  initial begin
    start = 0; wr_valid = 0; wr_data = 0; rd_en = 0; n_act = 3;
    rd_r0 = 0; rd_c0 = 0; rd_r0mod = 0; rd_c0mod = 0; rd_c0div = 0; rd_i = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int layer = 0; layer < 2; layer++) begin
      int n;
      n = (layer == 0) ? 3 : 2;
      foreach (img[i, r, c]) img[i][r][c] = $urandom;
      n_act = 2'(n);
      rd_r0 = 0; rd_c0 = 0; rd_r0mod = 0; rd_c0mod = 0; rd_c0div = 0; rd_i = 0;
      start = 1; @(posedge clk); #1; start = 0;
      wdone = 0;
      fork
        writer(n);
        reader(n);
      join
      checks++;
      if (!wdone) failures++;
    end
    checks++;
    if (held == 0 || waited == 0) begin
      failures++; $display("held=%0d waited=%0d", held, waited);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
