// tb_po_buffer: self-checking test of the parallel-out buffer with 4 CUs,
// up to 10 output maps and R = 2 lanes. For several m_act values the
// accumulators' groups are written (maps beyond m_act masked), then every
// drained beat is compared with the expected maps, lane validity, position
// tag and last-beat flag; busy must hold from claim to the last beat, and
// the drain must take exactly ceil(m_act/R) cycles.
module tb_po_buffer;
  localparam int NCU = 4, MAX_M = 10, R = 2, TAGW = 6;
  localparam int MG = 3;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [3:0]      m_act;
  logic            claim, busy, wr_valid, wr_last, out_last;
  logic [1:0]      wr_grp;
  logic [NCU-1:0]  wr_mask;
  logic [31:0]     wr_data [NCU];
  logic [TAGW-1:0] wr_tag, out_tag;
  logic [R-1:0]    out_valid;
  logic [31:0]     out_data [R];
  logic [2:0]      out_beat;
  int checks = 0, failures = 0;

  po_buffer #(.NCU(NCU), .MAX_M(MAX_M), .R(R), .TAGW(TAGW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("fail: %s", what); end
  endtask

  initial begin
    logic [31:0] vals [MG*NCU];
    claim = 0; wr_valid = 0; wr_last = 0; wr_grp = 0; wr_mask = 0; wr_tag = 0; m_act = 10;
    foreach (wr_data[c]) wr_data[c] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int rep = 0; rep < 60; rep++) begin
      int m, groups, nb;
      m = 1 + rep % MAX_M;
      m_act = 4'(m);
      groups = (m + NCU - 1) / NCU;
      nb = (m + R - 1) / R;
      chk(!busy, "idle before claim");
      claim = 1; @(posedge clk); #1; claim = 0;
      chk(busy, "busy after claim");
      repeat ($urandom_range(0, 3)) @(posedge clk);
      #1;
      for (int j = 0; j < groups; j++) begin
        wr_valid = 1; wr_grp = 2'(j); wr_last = (j == groups - 1); wr_tag = 6'(rep);
        for (int c = 0; c < NCU; c++) begin
          wr_mask[c] = (j * NCU + c < m);
          wr_data[c] = $urandom;
          if (wr_mask[c]) vals[j * NCU + c] = wr_data[c];
        end
        @(posedge clk); #1;
      end
      wr_valid = 0; wr_last = 0;
      for (int b = 0; b < nb; b++) begin
        chk(busy, "busy while draining");
        chk(int'(out_beat) == b, "beat number");
        chk(out_tag == 6'(rep), "tag");
        chk(out_last == (b == nb - 1), "last flag");
        for (int g = 0; g < R; g++) begin
          chk(out_valid[g] == (b * R + g < m), "lane valid");
          if (b * R + g < m) chk(out_data[g] == vals[b * R + g], "lane data");
        end
        @(posedge clk); #1;
      end
      chk(!busy && out_valid == 0, "released after drain");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
