// dslr_pe - processing element: TN left-to-right multipliers and an online
// adder tree.
//
// One PE covers one kernel position of one convolution window for TN input
// channels at once. Lane n multiplies the serial activation digit stream
// a[n] by the weight w[n], which stays fixed for the whole pass (weight
// stationary). The TN product streams go straight into an lr_adder_tree, so
// the PE result stream means sum_n a[n]*w[n] / 2^ceil(log2 TN) and has
// P + ceil(log2 TN) digits.
//
// Timing: clr in cycle 0, activation digit 1 in cycle 1, rec_en high in
// cycles 3 .. P+2 (driven by the control unit). Product digit 1 is visible in
// cycle 4, the PE's first result digit in cycle 4 + 2*ceil(log2 TN).
//
// Follows the paper: 16 LR serial-parallel multipliers feeding an online
// reduction tree, activation serial and weight parallel. Own choice: the 16
// lanes are the TN input channels of one kernel position (see the column
// module for the dataflow).
module dslr_pe
  import dslr_pkg::*;
#(
  parameter int unsigned TN = 16,
  parameter int unsigned P  = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clr,
  input  logic                 rec_en,
  input  logic [TN-1:0][P:0]   w,
  input  sd_t  [TN-1:0]        a,
  output sd_t                  z
);

  sd_t [TN-1:0] prod;

  for (genvar n = 0; n < TN; n++) begin : g_mul
    lr_spm #(.P(P)) u_spm (
      .clk    (clk),
      .rst_n  (rst_n),
      .clr    (clr),
      .rec_en (rec_en),
      .y      (w[n]),
      .x      (a[n]),
      .p      (prod[n])
    );
  end

  lr_adder_tree #(.N(TN)) u_tree (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (clr),
    .x     (prod),
    .z     (z)
  );

endmodule
