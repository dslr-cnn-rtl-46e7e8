// tb_lr_spm - self-checking testbench of the LR serial-parallel multiplier.
//
// Drives random signed-digit activations (all three digit values) and random
// weights, plus corner cases (largest magnitudes of both signs). The product
// digits, collected in cycles 4 .. P+3, are summed into an integer and
// compared with the exact product X*Y computed here in 64-bit arithmetic:
// the multiplier drops its final residual, so the error must stay below one
// unit of 2^-P. Also checks the timing: zero output before cycle 4 and a
// nonzero first digit in cycle 4 when the product is close to 1.
module tb_lr_spm;
  import dslr_pkg::*;

  localparam int P = 16;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, rec_en = 1'b0;
  logic [P:0] y;
  sd_t x, p;
  int checks = 0, failures = 0;

  lr_spm #(.P(P)) dut (.clk, .rst_n, .clr, .rec_en, .y, .x, .p);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int xd [P];
  int pd [P+8];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // one product; returns through pd the digits seen in cycles 1..P+8
  task automatic run(input logic signed [P:0] yv);
    longint xv, pv, ex, err;
    y = yv;
    clr = 1'b1; x = SD_ZERO; rec_en = 1'b0;
    @(posedge clk); #1;
    clr = 1'b0;
    for (int c = 1; c <= P + 8; c++) begin
      x = SD_ZERO;
      if (c <= P) begin
        x.pos = (xd[c-1] > 0);
        x.neg = (xd[c-1] < 0);
      end
      rec_en = (c >= 3 && c <= P + 2);
      pd[c-1] = int'(sd_val(p));   // digit visible in cycle c
      @(posedge clk); #1;
    end
    rec_en = 1'b0;
    xv = 0;
    for (int i = 0; i < P; i++) xv = xv * 2 + xd[i];
    pv = 0;
    for (int i = 1; i <= P; i++) pv = pv * 2 + pd[i+2];   // p_i in cycle i+3
    ex  = xv * longint'(yv);           // scaled by 2^(2P)
    err = pv * (64'sd1 <<< P) - ex;
    if (err < 0) err = -err;
    check(err < (64'sd1 <<< P), $sformatf("product x=%0d y=%0d got %0d exp %0d", xv, yv, pv, ex));
    check(pd[0] == 0 && pd[1] == 0 && pd[2] == 0, "output before cycle 4");
    for (int c = P + 4; c <= P + 8; c++) check(pd[c-1] == 0, "digit after the last product digit");
  endtask

  initial begin
    y = '0; x = SD_ZERO;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk); #1;

    // corner: X close to +1, Y close to +1 -> first digit must be +1
    for (int i = 0; i < P; i++) xd[i] = 1;
    run(17'sh0FFFF);
    check(pd[3] == 1, "first product digit in cycle 4");
    // corner: both close to -1 in magnitude
    for (int i = 0; i < P; i++) xd[i] = -1;
    run(-17'sh10000);
    run(17'sh0FFFF);
    for (int i = 0; i < P; i++) xd[i] = 1;
    run(-17'sh10000);
    // random
    for (int k = 0; k < 2000; k++) begin
      for (int i = 0; i < P; i++) xd[i] = int'($urandom_range(0, 2)) - 1;
      run(17'($urandom));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
