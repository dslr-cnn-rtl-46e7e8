// dslr_pkg - types and helpers shared by the DSLR-CNN datapath.
//
// Every digit-serial signal in the design carries one radix-2 signed digit
// per clock, most significant digit first. A digit d in {-1,0,+1} is coded
// as a pair of bits (pos, neg) with d = pos - neg, so both (0,0) and (1,1)
// mean zero. A stream d_1, d_2, ... is read as the fraction sum d_i * 2^-i.
// This borrow-save coding is the one the left-to-right (online) multiplier
// and adder of the design consume and produce.
package dslr_pkg;

  typedef struct packed {
    logic pos;
    logic neg;
  } sd_t;

  localparam sd_t SD_ZERO = '{pos: 1'b0, neg: 1'b0};

  // Value of a digit as a small signed integer (testbench and conversion use).
  function automatic logic signed [1:0] sd_val(sd_t d);
    return $signed({1'b0, d.pos}) - $signed({1'b0, d.neg});
  endfunction

endpackage
