// dslr_column - one column of a tile: KK processing elements and the column
// adder tree.
//
// A column computes one output pixel of one output channel for the current
// group of TN input channels. PE r handles kernel position r of the window
// (r = ky*K + kx for a K x K kernel, KK = K*K): it receives the TN activation
// streams of that window position and the TN weights of that kernel position.
// The KK PE results are summed by an lr_adder_tree of ceil(log2 KK) levels.
// The column result stream therefore means
//   sum_{r,n} a[r][n] * w[r][n] / 2^(ceil(log2 TN) + ceil(log2 KK))
// with P + ceil(log2 TN) + ceil(log2 KK) digits (24 for the default sizes).
//
// Timing: clr in cycle 0, activation digit 1 in cycle 1; the first result
// digit is visible in cycle 4 + 2*(ceil(log2 TN) + ceil(log2 KK)) (20 for
// the defaults).
//
// Follows the paper: 9 PEs per column whose outputs meet in an online adder
// ('+' block) in front of the output buffer. Own choice: the assignment of
// rows to kernel positions and of columns to output pixels.
module dslr_column
  import dslr_pkg::*;
#(
  parameter int unsigned KK = 9,
  parameter int unsigned TN = 16,
  parameter int unsigned P  = 16
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clr,
  input  logic                         rec_en,
  input  logic [KK-1:0][TN-1:0][P:0]   w,
  input  sd_t  [KK-1:0][TN-1:0]        a,
  output sd_t                          z
);

  sd_t [KK-1:0] pe_z;

  for (genvar r = 0; r < KK; r++) begin : g_pe
    dslr_pe #(.TN(TN), .P(P)) u_pe (
      .clk    (clk),
      .rst_n  (rst_n),
      .clr    (clr),
      .rec_en (rec_en),
      .w      (w[r]),
      .a      (a[r]),
      .z      (pe_z[r])
    );
  end

  lr_adder_tree #(.N(KK)) u_tree (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (clr),
    .x     (pe_z),
    .z     (z)
  );

endmodule
