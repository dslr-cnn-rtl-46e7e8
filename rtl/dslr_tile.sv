// dslr_tile - one tile of the PE array: COLS columns sharing one filter.
//
// A tile computes COLS output pixels (an 8 x 8 block of the output map for
// the defaults, Tr = Tc = 8) of one output channel for the current group of
// TN input channels. All columns get the same KK x TN weights, the filter of
// the tile's output channel; column c gets the activations of window c.
// TM tiles side by side (one per output channel of the output group) form
// the whole array; they share the activation streams.
//
// Timing is that of dslr_column: every column produces its result digits in
// the same cycles.
//
// Follows the paper: 9 x 64 PEs per tile, rows fed from the input buffer
// windows and columns fed from the kernel buffer. Own choice: which index is
// the window and which the kernel position (the paper's text and figure
// disagree on this).
module dslr_tile
  import dslr_pkg::*;
#(
  parameter int unsigned COLS = 64,
  parameter int unsigned KK   = 9,
  parameter int unsigned TN   = 16,
  parameter int unsigned P    = 16
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   clr,
  input  logic                                   rec_en,
  input  logic [KK-1:0][TN-1:0][P:0]             w,
  input  sd_t  [COLS-1:0][KK-1:0][TN-1:0]        a,
  output sd_t  [COLS-1:0]                        z
);

  for (genvar c = 0; c < COLS; c++) begin : g_col
    dslr_column #(.KK(KK), .TN(TN), .P(P)) u_col (
      .clk    (clk),
      .rst_n  (rst_n),
      .clr    (clr),
      .rec_en (rec_en),
      .w      (w),
      .a      (a[c]),
      .z      (z[c])
    );
  end

endmodule
