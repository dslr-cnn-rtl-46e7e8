// tb_dslr_tile - self-checking testbench of a tile (reduced to 4 columns of
// 9 PEs x 4 lanes).
//
// All columns share the weights; each column gets its own activations. Every
// column's result stream (P + 6 digits) must lie within 0.75 LSB per lane of
// its own sum(A*W) / 2^P; swapping or sharing column inputs would fail.
module tb_dslr_tile;
  import dslr_pkg::*;

  localparam int P    = 16;
  localparam int TN   = 4;
  localparam int KK   = 9;
  localparam int COLS = 4;
  localparam int LV   = 6;        // log2 TN + ceil(log2 KK)
  localparam int ND   = P + LV;
  localparam int FIRST = 4 + 2 * LV;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, rec_en = 1'b0;
  logic [KK-1:0][TN-1:0][P:0] w;
  sd_t  [COLS-1:0][KK-1:0][TN-1:0] a;
  sd_t  [COLS-1:0] z;
  int checks = 0, failures = 0;

  dslr_tile #(.COLS(COLS), .KK(KK), .TN(TN), .P(P)) dut (.clk, .rst_n, .clr, .rec_en, .w, .a, .z);

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

  logic [P-1:0] av [COLS][KK][TN];
  int zd [COLS][ND + FIRST + 4];

  initial begin
    longint s, zv, err;
    w = '0; a = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 300; k++) begin
      for (int r = 0; r < KK; r++)
        for (int n = 0; n < TN; n++) begin
          w[r][n] = (P+1)'($urandom);
          for (int col = 0; col < COLS; col++) av[col][r][n] = P'($urandom);
        end
      @(negedge clk);
      clr = 1'b1; a = '0;
      @(negedge clk);
      clr = 1'b0;
      for (int c = 1; c < ND + FIRST + 4; c++) begin
        for (int col = 0; col < COLS; col++) begin
          for (int r = 0; r < KK; r++)
            for (int n = 0; n < TN; n++) a[col][r][n] = (c <= P) ? act_digit(av[col][r][n], c) : SD_ZERO;
          zd[col][c] = int'(sd_val(z[col]));
        end
        rec_en = (c >= 3 && c <= P + 2);
        @(negedge clk);
      end
      rec_en = 1'b0;
      for (int col = 0; col < COLS; col++) begin
        s = 0;
        for (int r = 0; r < KK; r++)
          for (int n = 0; n < TN; n++) s += longint'($signed(av[col][r][n])) * longint'($signed(w[r][n]));
        zv = 0;
        for (int i = 0; i < ND; i++) zv = zv * 2 + zd[col][FIRST + i];
        err = zv * (64'sd1 <<< P) - s;
        if (err < 0) err = -err;
        check(err <= 64'(KK * TN) * (64'sd3 <<< (P - 2)), $sformatf("column %0d sum %0d got %0d", col, s, zv));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
