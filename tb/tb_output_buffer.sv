// tb_output_buffer - self-checking testbench of the output buffer (reduced to
// 2 tiles x 3 columns, ND = 24, 32-bit sums).
//
// Feeds random signed-digit streams (all digit codes) for several passes:
// the first pass with first = 1 overwrites, later passes add. After every
// commit each entry is read back and compared with the sum of the stream
// values computed here, sum_i d_i 2^(ND-i), accumulated over the passes.
module tb_output_buffer;
  import dslr_pkg::*;

  localparam int TM = 2, COLS = 3, ND = 24, OUT_W = 32;

  logic clk = 1'b0, rst_n = 1'b0;
  logic clr = 1'b0, shift = 1'b0, first = 1'b0, commit = 1'b0;
  sd_t [TM-1:0][COLS-1:0] z;
  logic rd_tile;
  logic [1:0] rd_col;
  logic signed [OUT_W-1:0] rd_data;
  int checks = 0, failures = 0;

  output_buffer #(.TM(TM), .COLS(COLS), .ND(ND), .OUT_W(OUT_W)) dut (
    .clk, .rst_n, .clr, .shift, .first, .commit, .z, .rd_tile, .rd_col, .rd_data);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint expv [TM][COLS];

  initial begin
    z = '0; rd_tile = '0; rd_col = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < 60; run++) begin
      for (int pass = 0; pass < 4; pass++) begin
        longint v [TM][COLS];
        @(negedge clk);
        clr = 1'b1;
        @(negedge clk);
        clr = 1'b0;
        for (int t = 0; t < TM; t++) for (int c = 0; c < COLS; c++) v[t][c] = 0;
        // a few idle cycles with garbage digits but shift low
        for (int k = 0; k < 3; k++) begin
          z = '1;
          @(negedge clk);
        end
        for (int i = 0; i < ND; i++) begin
          for (int t = 0; t < TM; t++)
            for (int c = 0; c < COLS; c++) begin
              z[t][c].pos = 1'($urandom);
              z[t][c].neg = 1'($urandom);
              v[t][c] = v[t][c] * 2 + sd_val(z[t][c]);
            end
          shift = 1'b1;
          @(negedge clk);
        end
        shift = 1'b0; z = '0;
        commit = 1'b1; first = (pass == 0);
        @(negedge clk);
        commit = 1'b0;
        for (int t = 0; t < TM; t++)
          for (int c = 0; c < COLS; c++) begin
            expv[t][c] = (pass == 0) ? v[t][c] : expv[t][c] + v[t][c];
            rd_tile = 1'(t); rd_col = 2'(c);
            #1;
            checks++;
            if (longint'(rd_data) != expv[t][c]) begin
              failures++;
              $display("FAIL: entry %0d/%0d got %0d exp %0d", t, c, rd_data, expv[t][c]);
            end
          end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
