// tb_cu: self-checking test of a computational unit at the paper's kernel
// size K = 5. Random windows and kernels enter every cycle (with occasional
// idle cycles); each result must equal the reference dot product, formed
// with the same pairing order of the adder tree, and must appear exactly
// 2 + 2*5 = 12 cycles after its window.
module tb_cu;
  import tb_fp_pkg::*;

  localparam int K = 5;
  localparam int KK = K * K;
  localparam int LAT = 12;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, out_valid;
  logic [31:0] win [KK], ker [KK];
  logic [31:0] y;
  int checks = 0, failures = 0;

  cu #(.K(K)) dut (.clk, .rst_n, .in_valid, .win, .ker, .out_valid, .y);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] ref_dot(input logic [31:0] w [KK], input logic [31:0] k [KK]);
    logic [31:0] v [$];
    logic [31:0] nx [$];
    foreach (w[e]) v.push_back(fmul(w[e], k[e]));
    while (v.size() > 1) begin
      nx = {};
      for (int e = 0; e < v.size(); e += 2)
        if (e + 1 < v.size()) nx.push_back(fadd(v[e], v[e+1]));
        else nx.push_back(v[e]);
      v = nx;
    end
    return v[0];
  endfunction

  logic [31:0] exp_e [LAT];
  logic        exp_v [LAT];
  int unsigned cyc = 0;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    exp_v[0] <= in_valid;
    exp_e[0] <= ref_dot(win, ker);
    for (int s = 1; s < LAT; s++) begin
      exp_v[s] <= exp_v[s-1];
      exp_e[s] <= exp_e[s-1];
    end
    if (rst_n) begin
      if (exp_v[LAT-1] != out_valid) begin
        failures++; $display("latency mismatch at cycle %0d", cyc);
      end
      if (exp_v[LAT-1]) begin
        checks++;
        if (y !== exp_e[LAT-1]) begin
          failures++;
          if (failures < 10) $display("mismatch: got %h expected %h", y, exp_e[LAT-1]);
        end
      end
    end
  end

  initial begin
    in_valid = 0;
    foreach (win[e]) begin win[e] = 0; ker[e] = 0; end
    foreach (exp_v[s]) exp_v[s] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int n = 0; n < 3000; n++) begin
      foreach (win[e]) begin
        win[e] = frand(8);
        ker[e] = frand(8);
        if (n % 11 == 0 && e % 3 == 0) win[e] = 0;   // zero elements (padding)
      end
      in_valid = (n % 9 != 4);
      @(posedge clk);
      #1;
    end
    in_valid = 0;
    repeat (LAT + 2) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
