// control_unit - sequencer of the DSLR-CNN accelerator.
//
// Holds a small table that describes the network, one entry per layer: the
// number of input-channel groups ngrp = ceil(N/TN), of spatial tiles
// nsp = ceil(R*C / (Tr*Tc)) and of output-channel groups nog = ceil(M/TM).
// After start it walks the layers and, inside each layer, the loop nest
//   for og < nog:  for sp < nsp:  for ig < ngrp:  one pass
// A pass is:
//   FETCH   ask for the data of the pass (fetch_req until fetch_done). For the
//           first layer the data comes from off-chip memory (fetch_src = 0),
//           for later layers from the on-chip buffer holding the previous
//           layer's results (fetch_src = 1). fetch_kernels is set on the
//           first pass of an output group, when the filters of that group
//           must be written to the kernel buffer.
//   RUN     cycle 0: clear the multipliers, adders and conversion registers
//           and latch the weights of group ig (kb_ld). Cycles 1..P: online
//           multiplication, the precision counter dig_idx steps through the
//           P activation digits and is reset when it reaches P
//           (precision = n). rec_en is high in cycles 3..P+2 (the
//           multipliers' recurrence stage). The online adder trees drain;
//           the output buffer shifts in the ND result digits in cycles
//           FIRST..LAST.
//   COMMIT  add the pass result to the partial sums (ob_first on ig = 0).
//           If this was the last partial product (ig = ngrp-1): STORE.
//   STORE   results of the spatial tile are complete: store_req until
//           store_done, then move on; when all og and sp are done the layer
//           is complete, the layer counter is incremented, and after the
//           last layer the unit ends (done).
// With the default sizes (P = 16, TN = 16, KK = 9) FIRST = 20, LAST = 43 and
// a pass takes 44 cycles of RUN plus one COMMIT cycle; the equation for the
// design's cycle count gives 42 per pass, one cycle less than the time from
// the first activation digit (cycle 1) to the last result digit (cycle 43),
// the difference being the multiplier's output register.
//
// Handshakes: fetch_req and store_req are levels held until a one-cycle
// done pulse from the other side. Counters are outputs so the other side
// knows what to move.
//
// Follows the paper's control flowchart (first layer / fetch from memory or
// buffer / online multiplication / precision counter and reset / online
// adder / last partial product / store result / layer completed / increment
// layer counter / last layer / end). Own choices: the layer table format,
// the loop order, the handshakes. Error monitoring and recovery, mentioned in
// the paper without detail, is not implemented.
module control_unit
#(
  parameter int unsigned P          = 16,
  parameter int unsigned TN         = 16,
  parameter int unsigned KK         = 9,
  parameter int unsigned NGRP       = 32,
  parameter int unsigned MAX_LAYERS = 32,
  parameter int unsigned CNT_W      = 16,
  localparam int unsigned LW        = (MAX_LAYERS > 1) ? $clog2(MAX_LAYERS) : 1,
  localparam int unsigned DW        = (P > 1) ? $clog2(P) : 1,
  localparam int unsigned GW        = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // layer table
  input  logic              cfg_we,
  input  logic [LW-1:0]     cfg_layer,
  input  logic [CNT_W-1:0]  cfg_ngrp,
  input  logic [CNT_W-1:0]  cfg_nsp,
  input  logic [CNT_W-1:0]  cfg_nog,
  input  logic [LW:0]       num_layers,
  // run control
  input  logic              start,
  output logic              busy,
  output logic              done,
  // data requests
  output logic              fetch_req,
  output logic              fetch_src,
  output logic              fetch_kernels,
  output logic [LW-1:0]     cur_layer,
  output logic [CNT_W-1:0]  cur_og,
  output logic [CNT_W-1:0]  cur_sp,
  output logic [CNT_W-1:0]  cur_ig,
  input  logic              fetch_done,
  output logic              store_req,
  input  logic              store_done,
  // datapath control
  output logic              pe_clr,
  output logic              rec_en,
  output logic              dig_en,
  output logic [DW-1:0]     dig_idx,
  output logic              kb_ld,
  output logic [GW-1:0]     kb_grp,
  output logic              ob_shift,
  output logic              ob_first,
  output logic              ob_commit
);

  localparam int unsigned L     = ((TN > 1) ? $clog2(TN) : 0) + ((KK > 1) ? $clog2(KK) : 0);
  localparam int unsigned ND    = P + L;
  localparam int unsigned FIRST = 4 + 2 * L;
  localparam int unsigned LAST  = FIRST + ND - 1;

  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_RUN, S_COMMIT, S_STORE} state_t;

  state_t             state;
  logic [7:0]         cyc;
  logic               prec_busy;
  logic [CNT_W-1:0]   tbl_ngrp [MAX_LAYERS];
  logic [CNT_W-1:0]   tbl_nsp  [MAX_LAYERS];
  logic [CNT_W-1:0]   tbl_nog  [MAX_LAYERS];

  logic last_ig, last_sp, last_og, last_layer;
  assign last_ig    = (cur_ig + 1'b1 >= tbl_ngrp[cur_layer]);
  assign last_sp    = (cur_sp + 1'b1 >= tbl_nsp[cur_layer]);
  assign last_og    = (cur_og + 1'b1 >= tbl_nog[cur_layer]);
  assign last_layer = ({1'b0, cur_layer} + 1'b1 >= num_layers);

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      tbl_ngrp[cfg_layer] <= cfg_ngrp;
      tbl_nsp[cfg_layer]  <= cfg_nsp;
      tbl_nog[cfg_layer]  <= cfg_nog;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      cyc       <= '0;
      done      <= 1'b0;
      cur_layer <= '0;
      cur_og    <= '0;
      cur_sp    <= '0;
      cur_ig    <= '0;
      dig_idx   <= '0;
      prec_busy <= 1'b0;
    end else begin
      case (state)
        S_IDLE: begin
          if (start) begin
            done      <= 1'b0;
            cur_layer <= '0;
            cur_og    <= '0;
            cur_sp    <= '0;
            cur_ig    <= '0;
            state     <= S_FETCH;
          end
        end
        S_FETCH: begin
          if (fetch_done) begin
            cyc   <= '0;
            state <= S_RUN;
          end
        end
        S_RUN: begin
          cyc <= cyc + 1'b1;
          // precision counter: one step per activation digit
          if (cyc == 8'd0) begin
            prec_busy <= 1'b1;
            dig_idx   <= '0;
          end else if (prec_busy) begin
            if (dig_idx == DW'(P - 1)) begin
              prec_busy <= 1'b0;          // precision = n: reset counter
              dig_idx   <= '0;
            end else begin
              dig_idx <= dig_idx + 1'b1;
            end
          end
          if (cyc == 8'(LAST)) state <= S_COMMIT;
        end
        S_COMMIT: begin
          if (last_ig) begin
            state <= S_STORE;
          end else begin
            cur_ig <= cur_ig + 1'b1;
            state  <= S_FETCH;
          end
        end
        S_STORE: begin
          if (store_done) begin
            cur_ig <= '0;
            state  <= S_FETCH;
            if (!last_sp) begin
              cur_sp <= cur_sp + 1'b1;
            end else begin
              cur_sp <= '0;
              if (!last_og) begin
                cur_og <= cur_og + 1'b1;
              end else begin
                // layer completed
                cur_og <= '0;
                if (last_layer) begin
                  done  <= 1'b1;
                  state <= S_IDLE;
                end else begin
                  cur_layer <= cur_layer + 1'b1;
                end
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy          = (state != S_IDLE);
    fetch_req     = (state == S_FETCH);
    fetch_src     = (cur_layer != '0);
    fetch_kernels = (state == S_FETCH) && (cur_sp == '0) && (cur_ig == '0);
    store_req     = (state == S_STORE);
    pe_clr        = (state == S_RUN) && (cyc == 8'd0);
    kb_ld         = pe_clr;
    kb_grp        = GW'(cur_ig);
    dig_en        = (state == S_RUN) && prec_busy;
    rec_en        = (state == S_RUN) && (cyc >= 8'd3) && (cyc <= 8'(P + 2));
    ob_shift      = (state == S_RUN) && (cyc >= 8'(FIRST)) && (cyc <= 8'(LAST));
    ob_commit     = (state == S_COMMIT);
    ob_first      = (cur_ig == '0);
  end

endmodule
