// input_buffer - activation windows, delivered digit-serially.
//
// COLS banks; bank c holds window c of the current spatial tile: KK kernel
// positions x TN input channels, one P-bit activation per word, at index
// r*TN + n. Activations are two's complement with value A / 2^P, in
// [-1/2, 1/2). Read most significant bit first, such a word already is a
// signed-digit stream: the sign bit is the digit -1/0 of weight 2^-1 and the
// remaining bits are digits 0/+1. The buffer therefore needs no conversion:
// during a pass it presents, for every word at once, the digit selected by
// digit_idx (0 = most significant). When digit_en is low every output digit
// is zero, which is what the multipliers must see outside the P digit cycles.
//
// Interface: one write port (bank, index, data) used by whoever fills the
// buffer from off-chip memory; digit outputs a[c][r][n] go to column c,
// PE r, lane n of every tile. Writes take effect at the clock edge; the
// digit outputs are combinational from the stored words and digit_idx.
//
// Follows the paper: one bank per window (64 windows of Tn x K x K), rows of
// PEs fed from the buffer, activations sent serially. Own choices: the word
// format, the write port and a register array as storage.
module input_buffer
  import dslr_pkg::*;
#(
  parameter int unsigned COLS = 64,
  parameter int unsigned KK   = 9,
  parameter int unsigned TN   = 16,
  parameter int unsigned P    = 16,
  localparam int unsigned BW  = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned IW  = (KK*TN > 1) ? $clog2(KK*TN) : 1,
  localparam int unsigned DW  = (P > 1) ? $clog2(P) : 1
) (
  input  logic                              clk,
  input  logic                              wr_en,
  input  logic [BW-1:0]                     wr_bank,
  input  logic [IW-1:0]                     wr_idx,
  input  logic [P-1:0]                      wr_data,
  input  logic                              digit_en,
  input  logic [DW-1:0]                     digit_idx,
  output sd_t  [COLS-1:0][KK-1:0][TN-1:0]   a
);

  logic [P-1:0] mem [COLS][KK*TN];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_bank][wr_idx] <= wr_data;
  end

  always_comb begin
    for (int c = 0; c < COLS; c++) begin
      for (int r = 0; r < KK; r++) begin
        for (int n = 0; n < TN; n++) begin
          logic b;
          b = mem[c][r*TN+n][P-1-int'(digit_idx)];
          a[c][r][n].pos = digit_en && (digit_idx != '0) && b;
          a[c][r][n].neg = digit_en && (digit_idx == '0) && b;
        end
      end
    end
  end

endmodule
