// tb_fp_add: self-checking test of the two-stage floating-point adder.
// Random operands with nearby exponents plus zero, cancellation,
// equal-exponent and overflow cases are fed back to back; every result is compared with the
// reference sum and must appear exactly 2 cycles after its operands.
module tb_fp_add;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, out_valid;
  logic [31:0] a, b, y;
  int checks = 0, failures = 0;

  fp_add dut (.clk, .rst_n, .in_valid, .a, .b, .out_valid, .y);

  logic [31:0] exp_q [$];
  int unsigned cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Checker: results come out exactly two cycles after issue.
  logic [31:0] pipe_e [2];
  logic        pipe_v [2];
  always @(posedge clk) begin
    if (rst_n) begin
      if (pipe_v[1] != out_valid) begin
        failures++; $display("valid timing mismatch at %0d", cyc);
      end
      if (pipe_v[1]) begin
        checks++;
        if (y !== pipe_e[1]) begin
          failures++;
          if (failures < 10) $display("mismatch: got %h expected %h", y, pipe_e[1]);
        end
      end
    end
  end

  task automatic drive(input logic [31:0] x, input logic [31:0] z, input logic v);
    a = x; b = z; in_valid = v;
    @(posedge clk);
    #1;
  endtask

  initial begin
    in_valid = 0; a = 0; b = 0;
    pipe_v[0] = 0; pipe_v[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int n = 0; n < 20000; n++) begin
      logic [31:0] x, z;
      x = frand(20); z = frand(20);
      case (n % 10)
        0: x = 32'h0000_0000;
        1: z = {~x[31], x[30:0]};                            // exact cancellation
        2: z = {~x[31], x[30:2], 2'(x[1:0] + 1)};            // near cancellation
        3: z = {~x[31], 8'(x[30:23] - 1), x[22:0]};          // one-bit shift, subtract
        4: begin x = 32'h7f7f_ffff; z = 32'h7f7f_ffff; end   // overflow
        5: z = {z[31], x[30:23], z[22:0]};                   // equal exponents
        default: ;
      endcase
      if (n % 7 == 3) begin
        drive(x, z, 1'b0);
        continue;
      end
      drive(x, z, 1'b1);
    end
    drive(0, 0, 0); drive(0, 0, 0); drive(0, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference pipeline model of the expected results.
  always @(posedge clk) begin
    pipe_v[1] <= pipe_v[0];
    pipe_e[1] <= pipe_e[0];
    pipe_v[0] <= in_valid;
    pipe_e[0] <= fadd(a, b);
  end

endmodule
