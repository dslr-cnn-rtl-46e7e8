// tb_dslr_column - self-checking testbench of one column: 9 PEs of 16 lanes
// and the column adder tree, at the default sizes.
//
// Random activations and weights for all 144 lanes; the column result stream
// (24 digits from cycle 20) converted to an integer must lie within 0.75 LSB
// per lane (108) of sum(A*W) / 2^P, computed here exactly. Also checks that
// the result is zero before cycle 20 and that the stream ends at cycle 43.
module tb_dslr_column;
  import dslr_pkg::*;

  localparam int P  = 16;
  localparam int TN = 16;
  localparam int KK = 9;
  localparam int LV = 8;          // log2 TN + ceil(log2 KK)
  localparam int ND = P + LV;
  localparam int FIRST = 4 + 2 * LV;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, rec_en = 1'b0;
  logic [KK-1:0][TN-1:0][P:0] w;
  sd_t  [KK-1:0][TN-1:0] a;
  sd_t  z;
  int checks = 0, failures = 0;

  dslr_column #(.KK(KK), .TN(TN), .P(P)) dut (.clk, .rst_n, .clr, .rec_en, .w, .a, .z);

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

  function automatic sd_t act_digit(logic [P-1:0] v, int k);
    sd_t d;
    d = SD_ZERO;
    if (k == 1) d.neg = v[P-1];
    else        d.pos = v[P-k];
    return d;
  endfunction

  logic [P-1:0] av [KK][TN];
  int zd [ND + FIRST + 4];

  initial begin
    longint s, zv, err;
    w = '0; a = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 300; k++) begin
      for (int r = 0; r < KK; r++)
        for (int n = 0; n < TN; n++) begin
          av[r][n] = P'($urandom);
          w[r][n]  = (P+1)'($urandom);
          if (k == 0) begin av[r][n] = 16'h8000; w[r][n] = 17'h10000; end
          if (k == 1) begin av[r][n] = 16'h8000; w[r][n] = 17'h0FFFF; end
        end
      @(negedge clk);
      clr = 1'b1; a = '0;
      @(negedge clk);
      clr = 1'b0;
      for (int c = 1; c < ND + FIRST + 4; c++) begin
        for (int r = 0; r < KK; r++)
          for (int n = 0; n < TN; n++) a[r][n] = (c <= P) ? act_digit(av[r][n], c) : SD_ZERO;
        rec_en = (c >= 3 && c <= P + 2);
        zd[c] = int'(sd_val(z));
        @(negedge clk);
      end
      rec_en = 1'b0;
      s = 0;
      for (int r = 0; r < KK; r++)
        for (int n = 0; n < TN; n++) s += longint'($signed(av[r][n])) * longint'($signed(w[r][n]));
      zv = 0;
      for (int i = 0; i < ND; i++) zv = zv * 2 + zd[FIRST + i];
      err = zv * (64'sd1 <<< P) - s;
      if (err < 0) err = -err;
      check(err <= 64'(KK * TN) * (64'sd3 <<< (P - 2)), $sformatf("column sum %0d got %0d", s, zv));
      for (int c = 1; c < FIRST; c++) check(zd[c] == 0, "output before cycle 20");
      for (int c = FIRST + ND; c < ND + FIRST + 4; c++) check(zd[c] == 0, "output after cycle 43");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
