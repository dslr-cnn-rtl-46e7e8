// tb_dslr_pe - self-checking testbench of one processing element.
//
// Random 16-bit activations (sent as their signed-digit stream, sign digit
// first) and random 17-bit weights on all 16 lanes. The PE result stream
// (P+4 digits from cycle 12) is converted to an integer Z and compared with
// the exact sum S = sum_n A_n*W_n computed here: Z must lie within 0.75 LSB
// per lane of S / 2^P (the multipliers' residuals). Also checks that nothing
// appears before cycle 12.
module tb_dslr_pe;
  import dslr_pkg::*;

  localparam int P  = 16;
  localparam int TN = 16;
  localparam int LV = 4;          // log2 TN
  localparam int ND = P + LV;
  localparam int FIRST = 4 + 2 * LV;

  logic clk = 1'b0, rst_n = 1'b0, clr = 1'b0, rec_en = 1'b0;
  logic [TN-1:0][P:0] w;
  sd_t  [TN-1:0] a;
  sd_t  z;
  int checks = 0, failures = 0;

  dslr_pe #(.TN(TN), .P(P)) dut (.clk, .rst_n, .clr, .rec_en, .w, .a, .z);

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

  // digit k (1-based) of a P-bit two's complement activation
  function automatic sd_t act_digit(logic [P-1:0] v, int k);
    sd_t d;
    d = SD_ZERO;
    if (k == 1) d.neg = v[P-1];
    else        d.pos = v[P-k];
    return d;
  endfunction

  logic [P-1:0] av [TN];
  int zd [ND + FIRST + 4];

  initial begin
    longint s, zv, err;
    w = '0; a = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 600; k++) begin
      for (int n = 0; n < TN; n++) begin
        av[n] = P'($urandom);
        w[n]  = (P+1)'($urandom);
        if (k == 0) begin av[n] = 16'h8000; w[n] = 17'h10000; end  // -1/2 * -1
        if (k == 1) begin av[n] = 16'h7FFF; w[n] = 17'h10000; end
      end
      @(negedge clk);
      clr = 1'b1; a = '0;
      @(negedge clk);
      clr = 1'b0;
      for (int c = 1; c < ND + FIRST + 4; c++) begin
        for (int n = 0; n < TN; n++) a[n] = (c <= P) ? act_digit(av[n], c) : SD_ZERO;
        rec_en = (c >= 3 && c <= P + 2);
        zd[c] = int'(sd_val(z));
        @(negedge clk);
      end
      rec_en = 1'b0;
      s = 0;
      for (int n = 0; n < TN; n++) s += longint'($signed(av[n])) * longint'($signed(w[n]));
      zv = 0;
      for (int i = 0; i < ND; i++) zv = zv * 2 + zd[FIRST + i];
      err = zv * (64'sd1 <<< P) - s;
      if (err < 0) err = -err;
      check(err <= 64'(TN) * (64'sd3 <<< (P - 2)), $sformatf("PE sum %0d got %0d", s, zv));
      for (int c = 1; c < FIRST; c++) check(zd[c] == 0, "output before the first digit cycle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
