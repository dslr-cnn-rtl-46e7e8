// lr_adder_tree - online reduction tree: sum of N digit streams.
//
// A binary tree of lr_adder instances with L = ceil(log2 N) levels. Level 0
// holds the N input streams; node i of level l+1 adds nodes 2i and 2i+1 of
// level l. A node without a partner (N not a power of two) is added to a
// zero stream by an lr_adder as well, so every path through the tree has the
// same delay (2 cycles per level) and the same scaling (one halving per
// level). The result stream therefore means sum(x) / 2^L and is L digits
// longer than the inputs.
//
// Timing: with input digit 1 in cycle 1 (clr in cycle 0), output digit 1 is
// visible in cycle 1 + 2L.
//
// Follows the paper: a pairwise tree of online adders whose depth
// ceil(log2 N) enters the cycle count. Own choice: zero-operand adders for
// odd nodes.
module lr_adder_tree
  import dslr_pkg::*;
#(
  parameter int unsigned N = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  sd_t [N-1:0]   x,
  output sd_t           z
);

  localparam int unsigned L = (N > 1) ? $clog2(N) : 0;

  // node count of a level
  function automatic int unsigned nodes(int unsigned lvl);
    int unsigned n;
    n = N;
    for (int unsigned i = 0; i < lvl; i++) n = (n + 1) / 2;
    return n;
  endfunction

  sd_t node [L+1][N];

  for (genvar i = 0; i < N; i++) begin : g_in
    assign node[0][i] = x[i];
  end

  for (genvar l = 0; l < L; l++) begin : g_lvl
    for (genvar i = 0; i < nodes(l + 1); i++) begin : g_node
      sd_t b;
      if (2 * i + 1 < nodes(l)) begin : g_pair
        assign b = node[l][2*i+1];
      end else begin : g_odd
        assign b = SD_ZERO;
      end
      lr_adder u_add (
        .clk   (clk),
        .rst_n (rst_n),
        .clr   (clr),
        .x     (node[l][2*i]),
        .y     (b),
        .z     (node[l+1][i])
      );
    end
    // slots beyond the node count of this level are unused
    for (genvar i = nodes(l + 1); i < N; i++) begin : g_unused
      assign node[l+1][i] = SD_ZERO;
    end
  end

  assign z = node[L][0];

endmodule
