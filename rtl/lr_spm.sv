// lr_spm - radix-2 left-to-right serial-parallel multiplier (online delay 2).
//
// Multiplies a serial activation X, given as signed digits x_1, x_2, ... most
// significant first, by a parallel weight Y held constant for the whole
// product. Y is two's complement with P fraction bits, value in [-1, 1)
// (Y = -y_0 + sum y_i 2^-i). The product leaves one signed digit per cycle,
// most significant first, so it can feed an online adder directly.
//
// Recurrence (per cycle, one new input digit x_{j+3}):
//   v[j]    = 2 w[j] + Y * x_{j+3} * 2^-2
//   p_{j+1} = SELM(estimate of v[j])
//   w[j+1]  = v[j] - p_{j+1}
// The residual 2w is kept in carry-save form (registers WS and WC, P+4 bits:
// two integer bits and P+2 fraction bits). Each cycle a selector picks Y,
// its complement or zero according to the digit; the complement and a carry-in
// of one form -Y. The selected word, sign-extended (the 2^-2 shift is only a
// change of binary point), goes through a 3:2 carry-save adder with WS and WC.
// A 4-bit carry-propagate adder over the top bits of the two carry-save
// words gives the estimate (two integer bits, two fraction bits). SELM
// returns +1 when the estimate is at least 1/2, -1 when it is below -1/2 and
// 0 otherwise, which keeps |w| below 3/4. The selected digit is subtracted
// from the integer bits of the sum word (block M), and both words are shifted
// left one place into the registers.
//
// Timing: the cycle after clr is the first digit cycle. The first two digit
// cycles are the initialisation stage (rec_en low: no digit is selected and
// the output stays zero). With rec_en high, the product digit p_{j+1} is
// selected in the cycle that x_{j+3} is present and is visible on p one
// cycle later (output register). So x_1 in cycle 1 gives p_1 in cycle 4, and
// P product digits need rec_en in cycles 3 .. P+2. When rec_en is low the
// output digit is zero; whoever sequences the array (the control unit)
// drives rec_en, so no digit counter is needed in each multiplier.
//
// Follows the paper: the block structure (selector, 2-bit right shift, 3:2
// adder with c_x, 4-bit CPA, SELM, M, shift left, WS/WC, Z_out), online delay
// 2, two initialisation steps, activation serial and weight parallel.
// Own choices: the register width P+4, the SELM thresholds, the rec_en
// input and the clr/reset behaviour.
module lr_spm
  import dslr_pkg::*;
#(
  parameter int unsigned P = 16
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clr,      // start a new product: residual := 0
  input  logic         rec_en,   // recurrence stage: select and emit a digit
  input  logic [P:0]   y,        // parallel weight, P fraction bits
  input  sd_t          x,        // serial activation digit
  output sd_t          p         // serial product digit
);

  localparam int unsigned W = P + 4;

  logic [W-1:0] ws_q, wc_q;      // 2*w[j] in carry-save form
  logic [W-1:0] sel;             // Y, not(Y) or 0, sign-extended
  logic         cx;              // carry-in completing -Y
  logic [W-1:0] s, c;            // 3:2 adder outputs
  logic [3:0]   est;             // estimate of v[j]: 2 integer, 2 fraction bits
  sd_t          pd;              // selected digit
  logic [W-2:0] s_m;             // sum word after subtracting the digit,
                                 // without its MSB, which the shift drops

  always_comb begin
    // selector and arithmetic shift right by two (sign extension)
    if (x.pos && !x.neg) begin
      sel = {{(W-P-1){y[P]}}, y};
      cx  = 1'b0;
    end else if (x.neg && !x.pos) begin
      sel = ~{{(W-P-1){y[P]}}, y};
      cx  = 1'b1;
    end else begin
      sel = '0;
      cx  = 1'b0;
    end

    // 3:2 carry-save adder; c_x enters the free LSB of the carry word
    s = ws_q ^ wc_q ^ sel;
    c = {((ws_q[W-2:0] & wc_q[W-2:0]) | (ws_q[W-2:0] & sel[W-2:0]) |
          (wc_q[W-2:0] & sel[W-2:0])), cx};

    // 4-bit CPA on the most significant bits
    est = s[W-1:W-4] + c[W-1:W-4];

    // SELM
    pd = SD_ZERO;
    if (rec_en) begin
      if (!est[3] && est[2:0] >= 3'd2)      pd = '{pos: 1'b1, neg: 1'b0};  // est >= 1/2
      else if (est[3] && est[2:0] < 3'd6)   pd = '{pos: 1'b0, neg: 1'b1};  // est <  -1/2
    end

    // M: subtract the digit (weight 1 = bit W-2) from the sum word. The MSB
    // is shifted out next, so modulo 2^(W-1) subtracting or adding 1 at bit
    // W-2 is the same as inverting that bit.
    s_m = s[W-2:0];
    s_m[W-2] = s[W-2] ^ (pd.pos ^ pd.neg);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws_q <= '0;
      wc_q <= '0;
      p    <= SD_ZERO;
    end else if (clr) begin
      ws_q <= '0;
      wc_q <= '0;
      p    <= SD_ZERO;
    end else begin
      ws_q <= {s_m, 1'b0};
      wc_q <= {c[W-2:0], 1'b0};
      p    <= pd;
    end
  end

endmodule
