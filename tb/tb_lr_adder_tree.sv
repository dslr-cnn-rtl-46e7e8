// tb_lr_adder_tree - self-checking testbench of the online reduction tree.
//
// Two trees, N = 16 (PE tree) and N = 9 (column tree, which has odd nodes),
// get random signed-digit streams of L digits. The result stream, whose
// first digit must appear in cycle 1 + 2*ceil(log2 N), must equal the sum of
// the inputs divided by 2^ceil(log2 N) exactly; as integers
// sum z_i 2^(L+D-i) = sum_n sum_i x_{n,i} 2^(L-i), D = ceil(log2 N).
module tb_lr_adder_tree;
  import dslr_pkg::*;

  localparam int L = 16;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  sd_t [15:0] x16;
  sd_t [8:0]  x9;
  sd_t z16, z9;
  int checks = 0, failures = 0;

  lr_adder_tree #(.N(16)) dut16 (.clk, .rst_n, .clr, .x(x16), .z(z16));
  lr_adder_tree #(.N(9))  dut9  (.clk, .rst_n, .clr, .x(x9),  .z(z9));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  sd_t xs [16][L];
  int  z16d [L+16], z9d [L+16];

  initial begin
    longint s16, s9, v16, v9;
    x16 = '0; x9 = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 1500; k++) begin
      for (int n = 0; n < 16; n++)
        for (int i = 0; i < L; i++) begin
          xs[n][i].pos = 1'($urandom);
          xs[n][i].neg = 1'($urandom);
          if (k == 0) xs[n][i] = '{pos: 1'b1, neg: 1'b0};
          if (k == 1) xs[n][i] = '{pos: 1'b0, neg: 1'b1};
        end
      @(negedge clk);
      clr = 1'b1; x16 = '0; x9 = '0;
      @(negedge clk);
      clr = 1'b0;
      for (int c = 1; c <= L + 16; c++) begin
        for (int n = 0; n < 16; n++) x16[n] = (c <= L) ? xs[n][c-1] : SD_ZERO;
        for (int n = 0; n < 9; n++)  x9[n]  = (c <= L) ? xs[n][c-1] : SD_ZERO;
        z16d[c-1] = int'(sd_val(z16));
        z9d[c-1]  = int'(sd_val(z9));
        @(negedge clk);
      end
      s16 = 0; s9 = 0;
      for (int n = 0; n < 16; n++) begin
        longint v;
        v = 0;
        for (int i = 0; i < L; i++) v = v * 2 + sd_val(xs[n][i]);
        s16 += v;
        if (n < 9) s9 += v;
      end
      // both trees have 4 levels: first digit in cycle 9, L+4 digits
      v16 = 0; v9 = 0;
      for (int i = 1; i <= L + 4; i++) begin
        v16 = v16 * 2 + z16d[i+7];
        v9  = v9 * 2 + z9d[i+7];
      end
      check(v16 == s16, $sformatf("N=16 sum %0d got %0d", s16, v16));
      check(v9 == s9, $sformatf("N=9 sum %0d got %0d", s9, v9));
      check(z16d[7] == 0 && z9d[7] == 0, "output before cycle 9");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
