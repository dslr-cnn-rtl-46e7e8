// kernel_buffer - filter storage and the stationary weight register.
//
// TM banks, one per tile (one output channel of the current output group).
// Bank t holds, for each of NGRP input-channel groups, the KK x TN weights of
// that filter slice, at index r*TN + n (kernel position r, channel n).
// Weights are two's complement with P fraction bits, value in [-1, 1).
// At the start of a pass, ld copies group rd_grp of every bank into the
// stationary register w, which feeds the multipliers in parallel for the
// whole pass. Keeping every input-channel group of the filters on chip lets
// the weights stay put while the array sweeps all spatial tiles of the
// output group.
//
// Interface: write port (tile, group, index, data); ld/rd_grp; output w.
// Timing: w changes at the clock edge that samples ld.
//
// Follows the paper: one bank per filter (Tn x K x K), weights fed in
// parallel, weight stationary. Own choices: NGRP groups per bank (32 covers
// 512 input channels with Tn = 16), the write port, register storage.
module kernel_buffer
#(
  parameter int unsigned TM   = 8,
  parameter int unsigned KK   = 9,
  parameter int unsigned TN   = 16,
  parameter int unsigned P    = 16,
  parameter int unsigned NGRP = 32,
  localparam int unsigned TW  = (TM > 1) ? $clog2(TM) : 1,
  localparam int unsigned GW  = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned IW  = (KK*TN > 1) ? $clog2(KK*TN) : 1
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 wr_en,
  input  logic [TW-1:0]                        wr_tile,
  input  logic [GW-1:0]                        wr_grp,
  input  logic [IW-1:0]                        wr_idx,
  input  logic [P:0]                           wr_data,
  input  logic                                 ld,
  input  logic [GW-1:0]                        rd_grp,
  output logic [TM-1:0][KK-1:0][TN-1:0][P:0]   w
);

  logic [KK*TN-1:0][P:0] mem [TM][NGRP];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_tile][wr_grp][wr_idx] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int t = 0; t < TM; t++) w[t] <= '0;
    end else if (ld) begin
      for (int t = 0; t < TM; t++) w[t] <= mem[t][rd_grp];
    end
  end

endmodule
