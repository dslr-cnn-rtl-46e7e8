// output_buffer - result conversion and partial-sum storage.
//
// One entry per tile and column (TM x COLS). While shift is high, each entry
// takes the result digit of its column and folds it into a conversion
// register, Q <- 2Q + d, which turns the most-significant-digit-first
// signed-digit stream into two's complement without any carry chain other
// than one adder per cycle. After ND digits Q holds the column result times
// 2^ND. commit then writes Q into the stored sum (first = 1, first
// input-channel group) or adds it to it, so the sum over all ceil(N/TN)
// groups builds up across passes. clr clears the conversion registers at the
// start of a pass.
//
// Scaling: with P-bit activations (value A/2^P), P+1-bit weights (value
// W/2^P), TN lanes and KK kernel positions, the stored sum equals
// sum(A*W) / 2^P, short of at most 3/4 of an LSB per product (the multiplier
// drops its final residual).
//
// Interface: z[t][c] result digits, rd_tile/rd_col read port (combinational).
//
// Follows the paper: the column adders write their results into the output
// buffer. Own choices: the on-the-fly conversion, accumulation over
// input-channel groups, widths.
module output_buffer
  import dslr_pkg::*;
#(
  parameter int unsigned TM    = 8,
  parameter int unsigned COLS  = 64,
  parameter int unsigned ND    = 24,
  parameter int unsigned OUT_W = 32,
  localparam int unsigned TW   = (TM > 1) ? $clog2(TM) : 1,
  localparam int unsigned CW   = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clr,
  input  logic                          shift,
  input  logic                          first,
  input  logic                          commit,
  input  sd_t  [TM-1:0][COLS-1:0]       z,
  input  logic [TW-1:0]                 rd_tile,
  input  logic [CW-1:0]                 rd_col,
  output logic signed [OUT_W-1:0]       rd_data
);

  logic signed [ND:0]      q   [TM][COLS];
  logic signed [OUT_W-1:0] acc [TM][COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < TM; t++)
        for (int c = 0; c < COLS; c++) begin
          q[t][c]   <= '0;
          acc[t][c] <= '0;
        end
    end else begin
      for (int t = 0; t < TM; t++)
        for (int c = 0; c < COLS; c++) begin
          if (clr)
            q[t][c] <= '0;
          else if (shift)
            q[t][c] <= (q[t][c] <<< 1) + (ND+1)'(sd_val(z[t][c]));
          if (commit)
            acc[t][c] <= first ? OUT_W'(q[t][c]) : acc[t][c] + OUT_W'(q[t][c]);
        end
    end
  end

  assign rd_data = acc[rd_tile][rd_col];

endmodule
