// dslr_top - DSLR-CNN convolution accelerator.
//
// Convolution with digit-serial, most-significant-digit-first (left-to-
// right, "online") arithmetic. Activations enter the PE array one signed
// digit per cycle, weights in parallel; online multipliers hand their
// product digits straight to trees of online adders, so every stage starts
// working two cycles after the one before it instead of waiting for a full
// word. One pass produces, for TM output channels x COLS output pixels, the
// sum over a TN-channel x KK-position window in P + log2(TN) + log2(KK)
// cycles plus the online delays.
//
// Blocks (defaults = the paper's configuration):
//   control_unit   layer table, pass sequencing, handshakes
//   input_buffer   COLS = 64 windows of KK = 9 x TN = 16 activations, P = 16
//                  bits, sent digit-serially to all tiles
//   kernel_buffer  TM = 8 filters (NGRP input-channel groups each) and the
//                  stationary weight register
//   dslr_tile x TM 64 columns x 9 PEs x 16 LR multipliers = 9216 multipliers
//                  per tile, 73,728 in total
//   output_buffer  conversion to two's complement and partial sums, TM x COLS
//
// External side: the off-chip memory and the agent that moves data are not
// part of the design. The control unit asks for the data of a pass on the
// fetch_* handshake; the agent writes the input buffer (and, when
// fetch_kernels is set, the kernel buffer) through the write ports and
// pulses fetch_done. When store_req is high the output buffer holds the
// finished results of one spatial tile, readable through ob_rd_*; the agent
// pulses store_done when it has them.
//
// Timing: see control_unit; 45 cycles per pass plus the fetch and store
// handshakes for the defaults.
module dslr_top
  import dslr_pkg::*;
#(
  parameter int unsigned TM         = 8,
  parameter int unsigned COLS       = 64,
  parameter int unsigned KK         = 9,
  parameter int unsigned TN         = 16,
  parameter int unsigned P          = 16,
  parameter int unsigned NGRP       = 32,
  parameter int unsigned MAX_LAYERS = 32,
  parameter int unsigned OUT_W      = 32,
  localparam int unsigned CNT_W     = 16,
  localparam int unsigned LW        = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1,
  localparam int unsigned TW        = (TM > 1) ? $clog2(TM) : 1,
  localparam int unsigned BW        = (COLS > 1) ? $clog2(COLS) : 1,
  localparam int unsigned IW        = (KK*TN > 1) ? $clog2(KK*TN) : 1,
  localparam int unsigned GW        = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // layer table and run control
  input  logic                     cfg_we,
  input  logic [LW-1:0]            cfg_layer,
  input  logic [CNT_W-1:0]         cfg_ngrp,
  input  logic [CNT_W-1:0]         cfg_nsp,
  input  logic [CNT_W-1:0]         cfg_nog,
  input  logic [LW:0]              num_layers,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // data requests to the off-chip side
  output logic                     fetch_req,
  output logic                     fetch_src,
  output logic                     fetch_kernels,
  output logic [LW-1:0]            cur_layer,
  output logic [CNT_W-1:0]         cur_og,
  output logic [CNT_W-1:0]         cur_sp,
  output logic [CNT_W-1:0]         cur_ig,
  input  logic                     fetch_done,
  // input buffer write port
  input  logic                     ib_wr_en,
  input  logic [BW-1:0]            ib_wr_bank,
  input  logic [IW-1:0]            ib_wr_idx,
  input  logic [P-1:0]             ib_wr_data,
  // kernel buffer write port
  input  logic                     kb_wr_en,
  input  logic [TW-1:0]            kb_wr_tile,
  input  logic [GW-1:0]            kb_wr_grp,
  input  logic [IW-1:0]            kb_wr_idx,
  input  logic [P:0]               kb_wr_data,
  // results
  output logic                     store_req,
  input  logic                     store_done,
  input  logic [TW-1:0]            ob_rd_tile,
  input  logic [BW-1:0]            ob_rd_col,
  output logic signed [OUT_W-1:0]  ob_rd_data
);

  localparam int unsigned L  = ((TN > 1) ? $clog2(TN) : 0) + ((KK > 1) ? $clog2(KK) : 0);
  localparam int unsigned ND = P + L;
  localparam int unsigned DW = (P > 1) ? $clog2(P) : 1;

  logic                              pe_clr, rec_en, dig_en, kb_ld;
  logic [DW-1:0]                     dig_idx;
  logic [GW-1:0]                     kb_grp;
  logic                              ob_shift, ob_first, ob_commit;
  sd_t  [COLS-1:0][KK-1:0][TN-1:0]   act;
  logic [TM-1:0][KK-1:0][TN-1:0][P:0] wgt;
  sd_t  [TM-1:0][COLS-1:0]           res;

  control_unit #(
    .P(P), .TN(TN), .KK(KK), .NGRP(NGRP), .MAX_LAYERS(MAX_LAYERS), .CNT_W(CNT_W)
  ) u_cu (
    .clk, .rst_n,
    .cfg_we, .cfg_layer, .cfg_ngrp, .cfg_nsp, .cfg_nog, .num_layers,
    .start, .busy, .done,
    .fetch_req, .fetch_src, .fetch_kernels, .cur_layer, .cur_og, .cur_sp, .cur_ig,
    .fetch_done, .store_req, .store_done,
    .pe_clr, .rec_en, .dig_en, .dig_idx, .kb_ld, .kb_grp,
    .ob_shift, .ob_first, .ob_commit
  );

  input_buffer #(.COLS(COLS), .KK(KK), .TN(TN), .P(P)) u_ib (
    .clk,
    .wr_en     (ib_wr_en),
    .wr_bank   (ib_wr_bank),
    .wr_idx    (ib_wr_idx),
    .wr_data   (ib_wr_data),
    .digit_en  (dig_en),
    .digit_idx (dig_idx),
    .a         (act)
  );

  kernel_buffer #(.TM(TM), .KK(KK), .TN(TN), .P(P), .NGRP(NGRP)) u_kb (
    .clk, .rst_n,
    .wr_en   (kb_wr_en),
    .wr_tile (kb_wr_tile),
    .wr_grp  (kb_wr_grp),
    .wr_idx  (kb_wr_idx),
    .wr_data (kb_wr_data),
    .ld      (kb_ld),
    .rd_grp  (kb_grp),
    .w       (wgt)
  );

  for (genvar t = 0; t < TM; t++) begin : g_tile
    dslr_tile #(.COLS(COLS), .KK(KK), .TN(TN), .P(P)) u_tile (
      .clk, .rst_n,
      .clr    (pe_clr),
      .rec_en (rec_en),
      .w      (wgt[t]),
      .a      (act),
      .z      (res[t])
    );
  end

  output_buffer #(.TM(TM), .COLS(COLS), .ND(ND), .OUT_W(OUT_W)) u_ob (
    .clk, .rst_n,
    .clr     (pe_clr),
    .shift   (ob_shift),
    .first   (ob_first),
    .commit  (ob_commit),
    .z       (res),
    .rd_tile (ob_rd_tile),
    .rd_col  (ob_rd_col),
    .rd_data (ob_rd_data)
  );

endmodule
