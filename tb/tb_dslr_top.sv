// tb_dslr_top - end-to-end testbench of the accelerator.
//
// Plays the off-chip side: on every fetch request it writes the windows of
// the pass into the input buffer and, when asked, the filters of the output
// group (all input-channel groups) into the kernel buffer; on every store
// request it reads all TM x COLS results and checks them against the
// convolution sums computed here, sum over groups, kernel positions and
// channels of A*W, divided by 2^P, within 0.75 LSB per product.
// Data are pseudo-random functions of (layer, tile, group, window, word), so
// every pass gets different values.
//
// Run with TM = 2, COLS = 4, NGRP = 4 (KK = 9, TN = 16, P = 16 as in the
// design) over two layers: layer 0 has 2 input groups, 2 spatial tiles and 2
// output groups, layer 1 one of each. The mechanisms of the control flow are
// counted and each must occur: fetch from memory, fetch from the on-chip
// buffer, kernel fetch, accumulation of a partial product over input groups,
// precision-counter reset, store, layer-counter increment, end.
// The size is set by the parameters below; the design's own defaults are
// TM = 8, COLS = 64, NGRP = 32.
module tb_dslr_top;
  import dslr_pkg::*;

  localparam int TM = 2, COLS = 4, KK = 9, TN = 16, P = 16, NGRP = 4, OUT_W = 32;
  localparam int NLAYER = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [4:0] cfg_layer;
  logic [15:0] cfg_ngrp, cfg_nsp, cfg_nog;
  logic [5:0] num_layers;
  logic start = 1'b0, busy, done;
  logic fetch_req, fetch_src, fetch_kernels, fetch_done = 1'b0;
  logic [4:0] cur_layer;
  logic [15:0] cur_og, cur_sp, cur_ig;
  logic ib_wr_en = 1'b0;
  logic [$clog2(COLS)-1:0] ib_wr_bank;
  logic [7:0] ib_wr_idx;
  logic [P-1:0] ib_wr_data;
  logic kb_wr_en = 1'b0;
  logic [$clog2(TM)-1:0] kb_wr_tile;
  logic [$clog2(NGRP)-1:0] kb_wr_grp;
  logic [7:0] kb_wr_idx;
  logic [P:0] kb_wr_data;
  logic store_req, store_done = 1'b0;
  logic [$clog2(TM)-1:0] ob_rd_tile;
  logic [$clog2(COLS)-1:0] ob_rd_col;
  logic signed [OUT_W-1:0] ob_rd_data;
  int checks = 0, failures = 0;

  dslr_top #(.TM(TM), .COLS(COLS), .KK(KK), .TN(TN), .P(P), .NGRP(NGRP), .OUT_W(OUT_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // pseudo-random data
  function automatic logic [31:0] mix(int a, int b, int c, int d, int e);
    logic [31:0] h;
    h = 32'h9E3779B9;
    h = (h ^ 32'(a)) * 32'h85EBCA6B;
    h = (h ^ 32'(b)) * 32'hC2B2AE35;
    h = (h ^ 32'(c)) * 32'h27D4EB2F;
    h = (h ^ 32'(d)) * 32'h165667B1;
    h = (h ^ 32'(e)) * 32'h85EBCA6B;
    return h ^ (h >> 15);
  endfunction
  function automatic logic [P-1:0] act(int l, int sp, int ig, int c, int i);
    return P'(mix(1 + l, sp, ig, c, i));
  endfunction
  function automatic logic [P:0] wgt(int l, int og, int t, int g, int i);
    return (P+1)'(mix(100 + l, og, t, g, i) >> 3);
  endfunction

  int ngrp [NLAYER] = '{2, 1};
  int nsp  [NLAYER] = '{2, 1};
  int nog  [NLAYER] = '{2, 1};

  // expected sums of the current spatial tile
  longint exp_sum [TM][COLS];

  int n_fetch_mem = 0, n_fetch_buf = 0, n_fetch_k = 0, n_accum = 0, n_prec = 0;
  int n_store = 0, n_layer_inc = 0, n_done = 0;
  logic [4:0] last_layer_seen = '0;

  always @(negedge clk) begin
    if (dut.ob_commit && !dut.ob_first) n_accum++;
    if (dut.dig_en && dut.dig_idx == 4'(P - 1)) n_prec++;
    if (cur_layer != last_layer_seen) begin
      n_layer_inc++;
      last_layer_seen = cur_layer;
    end
  end

  task automatic do_fetch();
    int l, og, sp, ig;
    l = int'(cur_layer); og = int'(cur_og); sp = int'(cur_sp); ig = int'(cur_ig);
    if (fetch_src) n_fetch_buf++; else n_fetch_mem++;
    if (fetch_kernels) begin
      n_fetch_k++;
      for (int t = 0; t < TM; t++)
        for (int g = 0; g < ngrp[l]; g++)
          for (int i = 0; i < KK*TN; i++) begin
            kb_wr_en = 1'b1; kb_wr_tile = $bits(kb_wr_tile)'(t); kb_wr_grp = $bits(kb_wr_grp)'(g);
            kb_wr_idx = 8'(i); kb_wr_data = wgt(l, og, t, g, i);
            @(negedge clk);
          end
      kb_wr_en = 1'b0;
    end
    for (int c = 0; c < COLS; c++)
      for (int i = 0; i < KK*TN; i++) begin
        ib_wr_en = 1'b1; ib_wr_bank = $bits(ib_wr_bank)'(c); ib_wr_idx = 8'(i);
        ib_wr_data = act(l, sp, ig, c, i);
        @(negedge clk);
      end
    ib_wr_en = 1'b0;
    // reference
    for (int t = 0; t < TM; t++)
      for (int c = 0; c < COLS; c++) begin
        if (ig == 0) exp_sum[t][c] = 0;
        for (int i = 0; i < KK*TN; i++)
          exp_sum[t][c] += longint'($signed(act(l, sp, ig, c, i))) * longint'($signed(wgt(l, og, t, ig, i)));
      end
    fetch_done = 1'b1;
    @(negedge clk);
    fetch_done = 1'b0;
  endtask

  task automatic do_store();
    longint tol;
    tol = longint'(ngrp[cur_layer] * KK * TN) * (64'sd3 <<< (P - 2));
    for (int t = 0; t < TM; t++)
      for (int c = 0; c < COLS; c++) begin
        longint err;
        ob_rd_tile = $bits(ob_rd_tile)'(t); ob_rd_col = $bits(ob_rd_col)'(c);
        #1;
        err = longint'(ob_rd_data) * (64'sd1 <<< P) - exp_sum[t][c];
        if (err < 0) err = -err;
        check(err <= tol, $sformatf("layer %0d og %0d sp %0d tile %0d col %0d: got %0d exp %0d",
                                    cur_layer, cur_og, cur_sp, t, c, ob_rd_data, exp_sum[t][c] >>> P));
      end
    n_store++;
    @(negedge clk);
    store_done = 1'b1;
    @(negedge clk);
    store_done = 1'b0;
  endtask

  initial begin
    int start_cyc, cyc;
    cfg_layer = '0; cfg_ngrp = '0; cfg_nsp = '0; cfg_nog = '0; num_layers = 6'(NLAYER);
    ib_wr_bank = '0; ib_wr_idx = '0; ib_wr_data = '0;
    kb_wr_tile = '0; kb_wr_grp = '0; kb_wr_idx = '0; kb_wr_data = '0;
    ob_rd_tile = '0; ob_rd_col = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < NLAYER; l++) begin
      cfg_we = 1'b1; cfg_layer = 5'(l);
      cfg_ngrp = 16'(ngrp[l]); cfg_nsp = 16'(nsp[l]); cfg_nog = 16'(nog[l]);
      @(negedge clk);
    end
    cfg_we = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin
      if (fetch_req)      do_fetch();
      else if (store_req) do_store();
      else begin
        // pass timing: clr to commit
        if (dut.pe_clr) start_cyc = 0;
        @(negedge clk);
        start_cyc++;
        if (dut.ob_commit) check(start_cyc == 44, $sformatf("pass length %0d", start_cyc));
      end
    end
    n_done++;
    check(n_store == 5, "number of stores");
    check(n_fetch_mem > 0, "fetch from memory happened");
    check(n_fetch_buf > 0, "fetch from buffer happened");
    check(n_fetch_k > 0, "kernel fetch happened");
    check(n_accum > 0, "partial-product accumulation happened");
    check(n_prec > 0, "precision counter reset happened");
    check(n_store > 0, "store happened");
    check(n_layer_inc > 0, "layer counter increment happened");
    check(n_done > 0, "end reached");
    $display("mechanisms: fetch_mem=%0d fetch_buf=%0d kernel_fetch=%0d accumulate=%0d precision_reset=%0d store=%0d layer_inc=%0d done=%0d",
             n_fetch_mem, n_fetch_buf, n_fetch_k, n_accum, n_prec, n_store, n_layer_inc, n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
