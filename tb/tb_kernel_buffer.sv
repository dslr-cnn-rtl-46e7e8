// tb_kernel_buffer - self-checking testbench of the kernel buffer (reduced to
// 4 banks x 4 groups x 9 x 4 words).
//
// Writes random weights to every bank, group and index, then latches each
// group in turn and compares every word of the stationary register with the
// reference copy. Also checks that the register holds its value while the
// memory is rewritten (weight stationary) and that reset clears it.
module tb_kernel_buffer;
  localparam int TM = 4, KK = 9, TN = 4, P = 16, NGRP = 4;

  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en = 1'b0, ld = 1'b0;
  logic [1:0] wr_tile, wr_grp, rd_grp;
  logic [5:0] wr_idx;
  logic [P:0] wr_data;
  logic [TM-1:0][KK-1:0][TN-1:0][P:0] w;
  int checks = 0, failures = 0;

  kernel_buffer #(.TM(TM), .KK(KK), .TN(TN), .P(P), .NGRP(NGRP)) dut (
    .clk, .rst_n, .wr_en, .wr_tile, .wr_grp, .wr_idx, .wr_data, .ld, .rd_grp, .w);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [P:0] ref_mem [TM][NGRP][KK*TN];
  logic [P:0] old_mem [KK*TN];

  task automatic write(int t, int g, int i, logic [P:0] d);
    @(negedge clk);
    wr_en = 1'b1; wr_tile = 2'(t); wr_grp = 2'(g); wr_idx = 6'(i); wr_data = d;
    ref_mem[t][g][i] = d;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic compare(int g);
    for (int t = 0; t < TM; t++)
      for (int r = 0; r < KK; r++)
        for (int n = 0; n < TN; n++) begin
          checks++;
          if (w[t][r][n] !== ref_mem[t][g][r*TN+n]) begin
            failures++;
            if (failures < 10) $display("FAIL: tile %0d group %0d word %0d", t, g, r*TN+n);
          end
        end
  endtask

  initial begin
    wr_tile = '0; wr_grp = '0; wr_idx = '0; wr_data = '0; rd_grp = '0;
    repeat (2) @(negedge clk);
    checks++;
    if (w != '0) begin failures++; $display("FAIL: reset"); end
    rst_n = 1'b1;
    for (int t = 0; t < TM; t++)
      for (int g = 0; g < NGRP; g++)
        for (int i = 0; i < KK*TN; i++) write(t, g, i, (P+1)'($urandom));
    for (int g = NGRP - 1; g >= 0; g--) begin
      @(negedge clk);
      ld = 1'b1; rd_grp = 2'(g);
      @(negedge clk);
      ld = 1'b0;
      compare(g);
    end
    // stationary: rewriting group 0 does not disturb the latched weights
    for (int i = 0; i < KK*TN; i++) old_mem[i] = ref_mem[0][0][i];
    for (int i = 0; i < KK*TN; i++) write(0, 0, i, (P+1)'($urandom));
    for (int r = 0; r < KK; r++)
      for (int n = 0; n < TN; n++) begin
        checks++;
        if (w[0][r][n] !== old_mem[r*TN+n]) begin failures++; $display("FAIL: weights not stationary"); end
      end
    @(negedge clk);
    ld = 1'b1; rd_grp = 2'd0;
    @(negedge clk);
    ld = 1'b0;
    compare(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
