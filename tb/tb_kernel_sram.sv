// tb_kernel_sram: self-checking test of a CU's kernel SRAM at its default
// size (384 kernels of 5 x 5 elements). Elements are written one at a time
// and mixed with reads; each read must return the whole kernel as modelled
// one cycle after rd_en and hold while rd_en is low (the hold cycles move
// the address and rewrite the kernel just read, so a stray read shows).
module tb_kernel_sram;
  localparam int K = 5, KK = 25, DEPTH = 384;

  logic clk = 0;
  always #5 clk = ~clk;

  logic        wr_en, rd_en;
  logic [8:0]  wr_addr, rd_addr;
  logic [4:0]  wr_elem;
  logic [31:0] wr_data;
  logic [31:0] rd_data [KK];
  logic [31:0] model [DEPTH][KK];
  logic [31:0] expect_q [KK];
  int checks = 0, failures = 0;

  kernel_sram #(.K(K), .DEPTH(DEPTH)) dut (.clk, .wr_en, .wr_addr, .wr_elem, .wr_data,
                                           .rd_en, .rd_addr, .rd_data);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_out();
    for (int e = 0; e < KK; e++) begin
      checks++;
      if (rd_data[e] !== expect_q[e]) begin
        failures++;
        if (failures < 10) $display("elem %0d: got %h expected %h", e, rd_data[e], expect_q[e]);
      end
    end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_elem = 0; wr_data = 0;
    @(posedge clk); #1;
    // Fill every kernel completely (as before a batch).
    for (int a = 0; a < DEPTH; a++)
      for (int e = 0; e < KK; e++) begin
        wr_en = 1; wr_addr = 9'(a); wr_elem = 5'(e); wr_data = $urandom;
        model[a][e] = wr_data;
        @(posedge clk); #1;
      end
    wr_en = 0;
    // Random reads, some overlapped with writes to other kernels.
    for (int n = 0; n < 2000; n++) begin
      int ra;
      ra = $urandom_range(0, DEPTH - 1);
      rd_en = 1; rd_addr = 9'(ra);
      wr_en = (n % 3 == 0);
      wr_addr = 9'((ra + 1) % DEPTH); wr_elem = 5'($urandom_range(0, KK - 1)); wr_data = $urandom;
      @(posedge clk); #1;
      if (wr_en) model[wr_addr][wr_elem] = wr_data;
      expect_q = model[ra];
      rd_en = 0; wr_en = 0;
      check_out();
      // Output holds while rd_en is low, even when the address moves and the
      // kernel that was read is rewritten.
      rd_addr = 9'((ra + 7) % DEPTH);
      wr_en = 1; wr_addr = 9'(ra); wr_elem = 5'($urandom_range(0, KK - 1)); wr_data = $urandom;
      @(posedge clk); #1;
      model[wr_addr][wr_elem] = wr_data;
      wr_en = 0;
      check_out();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
