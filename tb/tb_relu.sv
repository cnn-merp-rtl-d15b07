// tb_relu: self-checking test of the ReLU: random positive and negative
// floats, zeros of both signs; the output must be max(0, x) one cycle later.
module tb_relu;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic        in_valid, out_valid;
  logic [31:0] x, y, e_q;
  logic        v_q;
  int checks = 0, failures = 0;

  relu dut (.clk, .rst_n, .in_valid, .x, .out_valid, .y);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    v_q <= in_valid;
    e_q <= (f2r(x) > 0.0) ? x : 32'h0;
    if (rst_n) begin
      checks++;
      if (out_valid !== v_q || (v_q && y !== e_q)) begin
        failures++;
        if (failures < 10) $display("x -> got %h expected %h", y, e_q);
      end
    end
  end

  initial begin
    in_valid = 0; x = 0; v_q = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int n = 0; n < 5000; n++) begin
      x = frand(30);
      if (n % 13 == 0) x = 32'h8000_0000;
      if (n % 17 == 0) x = 32'h0000_0000;
      in_valid = (n % 5 != 2);
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
