// tb_lr_adder - self-checking testbench of the online adder.
//
// Random signed-digit streams of L digits (all digit codes, including the
// redundant zero (1,1)) are added; the output stream, read in cycles
// 3 .. L+3, must equal (X + Y) / 2 exactly, i.e. as integers
// sum z_i 2^(L+1-i) = sum x_i 2^(L-i) + sum y_i 2^(L-i). Also checks that the
// output is zero in cycles 1..2 (online delay 2) and after the last digit.
module tb_lr_adder;
  import dslr_pkg::*;

  localparam int L = 20;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0;
  sd_t x, y, z;
  int checks = 0, failures = 0;

  lr_adder dut (.clk, .rst_n, .clr, .x, .y, .z);

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

  function automatic sd_t rnd_digit();
    sd_t d;
    d.pos = 1'($urandom);
    d.neg = 1'($urandom);
    return d;
  endfunction

  sd_t xs [L], ys [L];
  int  zd [L+6];

  initial begin
    longint xv, yv, zv;
    x = SD_ZERO; y = SD_ZERO;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 5000; k++) begin
      for (int i = 0; i < L; i++) begin
        xs[i] = rnd_digit();
        ys[i] = rnd_digit();
        if (k < 4) begin   // extremes: all +1 / all -1
          xs[i] = (k[0]) ? '{pos: 1'b1, neg: 1'b0} : '{pos: 1'b0, neg: 1'b1};
          ys[i] = (k[1]) ? '{pos: 1'b1, neg: 1'b0} : '{pos: 1'b0, neg: 1'b1};
        end
      end
      @(negedge clk);
      clr = 1'b1; x = SD_ZERO; y = SD_ZERO;
      @(negedge clk);
      clr = 1'b0;
      for (int c = 1; c <= L + 6; c++) begin
        x = (c <= L) ? xs[c-1] : SD_ZERO;
        y = (c <= L) ? ys[c-1] : SD_ZERO;
        zd[c-1] = int'(sd_val(z));
        @(negedge clk);
      end
      xv = 0; yv = 0; zv = 0;
      for (int i = 0; i < L; i++) begin
        xv = xv * 2 + sd_val(xs[i]);
        yv = yv * 2 + sd_val(ys[i]);
      end
      for (int i = 1; i <= L + 1; i++) zv = zv * 2 + zd[i+1];   // digit i in cycle i+2
      check(zv == xv + yv, $sformatf("sum %0d + %0d gave %0d", xv, yv, zv));
      check(zd[0] == 0 && zd[1] == 0, "output before cycle 3");
      for (int c = L + 4; c <= L + 6; c++) check(zd[c-1] == 0, "output after the last digit");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
