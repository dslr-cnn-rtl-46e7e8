// tb_input_buffer - self-checking testbench of the input buffer (default
// sizes: 64 windows x 144 words x 16 bits).
//
// Fills every word with a random value, then steps digit_idx through all P
// digits and checks every output digit against the bit it must carry:
// digit 0 is -1 where the sign bit is set, digit k > 0 is +1 where bit P-1-k
// is set. With digit_en low every digit must be zero. A rewrite of a few
// words is checked too.
module tb_input_buffer;
  import dslr_pkg::*;

  localparam int COLS = 64, KK = 9, TN = 16, P = 16;

  logic clk = 1'b0;
  logic wr_en = 1'b0, digit_en = 1'b0;
  logic [5:0] wr_bank;
  logic [7:0] wr_idx;
  logic [P-1:0] wr_data;
  logic [3:0] digit_idx;
  sd_t [COLS-1:0][KK-1:0][TN-1:0] a;
  int checks = 0, failures = 0;

  input_buffer #(.COLS(COLS), .KK(KK), .TN(TN), .P(P)) dut (
    .clk, .wr_en, .wr_bank, .wr_idx, .wr_data, .digit_en, .digit_idx, .a);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [P-1:0] ref_mem [COLS][KK*TN];

  task automatic write(int b, int i, logic [P-1:0] d);
    @(negedge clk);
    wr_en = 1'b1; wr_bank = 6'(b); wr_idx = 8'(i); wr_data = d;
    ref_mem[b][i] = d;
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic check_all();
    for (int d = 0; d < P; d++) begin
      @(negedge clk);
      digit_en = 1'b1; digit_idx = 4'(d);
      #1;
      for (int b = 0; b < COLS; b++)
        for (int r = 0; r < KK; r++)
          for (int n = 0; n < TN; n++) begin
            logic bit_v;
            bit_v = ref_mem[b][r*TN+n][P-1-d];
            checks++;
            if (a[b][r][n].pos != (d != 0 && bit_v) || a[b][r][n].neg != (d == 0 && bit_v)) begin
              failures++;
              if (failures < 10) $display("FAIL: bank %0d word %0d digit %0d", b, r*TN+n, d);
            end
          end
    end
    @(negedge clk);
    digit_en = 1'b0; digit_idx = 4'd0;
    #1;
    checks++;
    if (a != '0) begin
      failures++;
      $display("FAIL: digits not zero with digit_en low");
    end
  endtask

  initial begin
    wr_bank = '0; wr_idx = '0; wr_data = '0; digit_idx = '0;
    for (int b = 0; b < COLS; b++)
      for (int i = 0; i < KK*TN; i++) write(b, i, P'($urandom));
    check_all();
    for (int k = 0; k < 50; k++) write(int'($urandom_range(0, COLS-1)), int'($urandom_range(0, KK*TN-1)), P'($urandom));
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
