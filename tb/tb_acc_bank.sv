// tb_acc_bank: self-checking test of the per-CU accumulators. Partial
// results for several output groups arrive in the controller's order (all
// groups of input map 0, then of map 1, ...), with the group count both above
// and below the adder latency (the latter exercising forwarding). Each
// finished sum must equal the sequential reference sum over the maps and
// appear 2 cycles after the last partial result, with its group number.
module tb_acc_bank;
  import tb_fp_pkg::*;
  localparam int MG = 4;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic        in_valid, in_first, in_last, out_valid;
  logic [1:0]  in_grp, out_grp;
  logic [31:0] in_data, out_data;
  int checks = 0, failures = 0;

  acc_bank #(.MG(MG)) dut (.clk, .rst_n, .in_valid, .in_grp, .in_first, .in_last, .in_data,
                           .out_valid, .out_grp, .out_data);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] ref_sum [MG];
  logic [31:0] e_d [2];
  logic [1:0]  g_d [2];
  logic        v_d [2];

  always @(posedge clk) begin
    v_d[0] <= in_valid && in_last; e_d[0] <= fadd(in_first ? 32'h0 : ref_sum[in_grp], in_data);
    g_d[0] <= in_grp;
    v_d[1] <= v_d[0]; e_d[1] <= e_d[0]; g_d[1] <= g_d[0];
    if (in_valid) ref_sum[in_grp] <= fadd(in_first ? 32'h0 : ref_sum[in_grp], in_data);
    if (rst_n) begin
      if (out_valid != v_d[1]) begin failures++; $display("out_valid timing"); end
      if (v_d[1]) begin
        checks++;
        if (out_data !== e_d[1] || out_grp !== g_d[1]) begin
          failures++;
          if (failures < 10) $display("grp %0d: got %h expected %h", out_grp, out_data, e_d[1]);
        end
      end
    end
  end

  initial begin
    in_valid = 0; in_first = 0; in_last = 0; in_grp = 0; in_data = 0;
    v_d[0] = 0; v_d[1] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    #1;
    for (int rep = 0; rep < 200; rep++) begin
      int groups, dwell, nmaps;
      groups = 1 + rep % MG;
      dwell  = (groups < 2) ? 2 : groups;
      nmaps  = 1 + $urandom_range(0, 6);
      for (int i = 0; i < nmaps; i++)
        for (int j = 0; j < dwell; j++) begin
          in_valid = (j < groups);
          in_grp = 2'(j); in_first = (i == 0); in_last = (i == nmaps - 1);
          in_data = frand(6);
          @(posedge clk); #1;
        end
      in_valid = 0;
      if (rep % 5 == 0) repeat (3) @(posedge clk);
      #1;
    end
    in_valid = 0;
    repeat (4) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
