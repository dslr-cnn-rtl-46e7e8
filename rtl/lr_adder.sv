// lr_adder - radix-2 online (left-to-right) signed-digit adder, online delay 2.
//
// Adds two digit streams that arrive most significant digit first and emits
// their sum in the same order. Each input digit is a (pos, neg) bit pair.
// Two rows of full adders do the work, as in the classic borrow-save online
// adder:
//   FA1: x+ + not(x-) + y+          = 2 h + g   (position k, current cycle)
//   FA2: g(k-1) + h + not(y-(k-1))  = 2 t + w   (position k-1)
// g and y- of the previous position are held in registers between the rows;
// the sum bit w is held one more cycle so that the output digit of position
// k-2 is z = t - not(w). The output digit is registered. The constant offsets
// of the two complemented inputs cancel along the stream, which is why the
// pipeline state after clr (g = 1, y- = 0, w = 0) is the state that a stream
// of zero digits leaves behind.
//
// Value convention: the input streams x_1.. and y_1.. mean fractions in
// (-1, 1); their sum needs one integer digit. That digit becomes the first
// output digit, so the output stream read as a fraction equals (x + y) / 2
// and is one digit longer than the inputs.
//
// Timing: clr in cycle 0, input digits of position k in cycle k (k >= 1).
// Output digit i (weight 2^-i of (x+y)/2) is visible in cycle i + 2: the
// first output digit appears two cycles after the first input digit
// (online delay 2). Critical path: two full adders and a register.
//
// Follows the paper: two full-adder rows with registers between them, a latch
// on the FA2 sum and output latches, delay 2. Own choices: the polarity of
// the complemented inputs and outputs (the paper's inversion marks were not
// reproduced bit for bit), and clr.
module lr_adder
  import dslr_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  sd_t  x,
  input  sd_t  y,
  output sd_t  z
);

  logic g, h, w, t;
  logic g_q, yn_q, w_q;

  always_comb begin
    // FA1
    g = x.pos ^ ~x.neg ^ y.pos;
    h = (x.pos & ~x.neg) | (x.pos & y.pos) | (~x.neg & y.pos);
    // FA2
    w = g_q ^ h ^ ~yn_q;
    t = (g_q & h) | (g_q & ~yn_q) | (h & ~yn_q);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      g_q  <= 1'b1;
      yn_q <= 1'b0;
      w_q  <= 1'b0;
      z    <= SD_ZERO;
    end else if (clr) begin
      g_q  <= 1'b1;
      yn_q <= 1'b0;
      w_q  <= 1'b0;
      z    <= SD_ZERO;
    end else begin
      g_q  <= g;
      yn_q <= y.neg;
      w_q  <= w;
      z    <= '{pos: t, neg: ~w_q};
    end
  end

endmodule
