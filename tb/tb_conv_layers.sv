// tb_conv_layers - two convolution layers run through the accelerator.
//
// A miniature of the networks the design is meant for: the testbench holds
// real feature maps and filters and plays the data-movement agent, which
// cuts them into the windows of each pass.
//   layer 0: 3x3 kernels, stride 1, zero padding 1, N = 32 input channels
//            (two input-channel groups of TN = 16), M = 4 output channels,
//            4 x 4 input and output maps.
//   layer 1: 5x5 kernels, stride 1, zero padding 2, N = 4 input channels
//            (padded with zero channels to TN = 16), M = 2 output channels,
//            4 x 4 maps. Its input is the result of layer 0, rescaled by
//            2^-4 and saturated to 16 bits; it is fetched "from the on-chip
//            buffer" (fetch_src = 1). The 25 taps are cut into three slices
//            of up to 9 kernel positions, each run as one more input group
//            and accumulated in the output buffer.
// Group g of a pass is (channel group g / nslice, slice g % nslice); window
// word r*TN + n holds tap slice*9 + r of channel group*TN + n, zero where the
// tap or channel does not exist or the pixel lies in the padding.
// Every output is checked against a direct convolution of the same maps
// (independent of the slicing), within 0.75 LSB per multiplier product.
// The number of passes, stores and large-kernel slices is checked, and the
// control-flow mechanisms are counted as in the end-to-end test.
// The array is reduced to TM = 2 tiles of COLS = 8 columns; each column has
// the design's full 9 PEs x 16 multipliers.
module tb_conv_layers;
  import dslr_pkg::*;

  localparam int TM = 2, COLS = 8, KK = 9, TN = 16, P = 16, NGRP = 4, OUT_W = 32;
  localparam int NLAYER = 2, H = 4, WD = 4, NPIX = H * WD;
  localparam int MAXN = 32, MAXM = 4, MAXK = 5;

  // layer shapes
  int lN  [NLAYER] = '{32, 4};
  int lM  [NLAYER] = '{4, 2};
  int lK  [NLAYER] = '{3, 5};

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
    repeat (200000) @(posedge clk);
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

  // feature maps (value / 2^P) and filters (value / 2^P)
  logic signed [P-1:0] fmap [NLAYER][MAXN][H][WD];
  logic signed [P:0]   filt [NLAYER][MAXM][MAXN][MAXK][MAXK];

  function automatic int nslice(int l);
    return (lK[l] * lK[l] + KK - 1) / KK;
  endfunction
  function automatic int nchg(int l);
    return (lN[l] + TN - 1) / TN;
  endfunction

  // window word: activation of output pixel pix, group g, word i
  function automatic logic signed [P-1:0] win_act(int l, int pix, int g, int i);
    int r, n, tap, ch, y, x, k, pad;
    k = lK[l]; pad = k / 2;
    r = i / TN; n = i % TN;
    tap = (g % nslice(l)) * KK + r;
    ch  = (g / nslice(l)) * TN + n;
    if (tap >= k * k || ch >= lN[l]) return '0;
    y = pix / WD + tap / k - pad;
    x = pix % WD + tap % k - pad;
    if (y < 0 || y >= H || x < 0 || x >= WD) return '0;
    return fmap[l][ch][y][x];
  endfunction
  function automatic logic signed [P:0] win_wgt(int l, int m, int g, int i);
    int r, n, tap, ch, k;
    k = lK[l];
    r = i / TN; n = i % TN;
    tap = (g % nslice(l)) * KK + r;
    ch  = (g / nslice(l)) * TN + n;
    if (tap >= k * k || ch >= lN[l]) return '0;
    return filt[l][m][ch][tap / k][tap % k];
  endfunction

  // direct convolution, scale 2^(2P)
  function automatic longint conv_ref(int l, int m, int pix);
    longint s;
    int k, pad, y, x;
    s = 0; k = lK[l]; pad = k / 2;
    for (int ch = 0; ch < lN[l]; ch++)
      for (int dy = 0; dy < k; dy++)
        for (int dx = 0; dx < k; dx++) begin
          y = pix / WD + dy - pad;
          x = pix % WD + dx - pad;
          if (y >= 0 && y < H && x >= 0 && x < WD)
            s += longint'(fmap[l][ch][y][x]) * longint'(filt[l][m][ch][dy][dx]);
        end
    return s;
  endfunction

  int n_fetch_mem = 0, n_fetch_buf = 0, n_fetch_k = 0, n_accum = 0, n_prec = 0;
  int n_store = 0, n_layer_inc = 0, n_done = 0, n_pass = 0, n_slice = 0;
  logic [4:0] last_layer_seen = '0;

  always @(negedge clk) begin
    if (dut.ob_commit && !dut.ob_first) n_accum++;
    if (dut.ob_commit) n_pass++;
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
    if (ig % nslice(l) != 0) n_slice++;
    if (fetch_kernels) begin
      n_fetch_k++;
      for (int t = 0; t < TM; t++)
        for (int g = 0; g < nchg(l) * nslice(l); g++)
          for (int i = 0; i < KK*TN; i++) begin
            kb_wr_en = 1'b1; kb_wr_tile = $bits(kb_wr_tile)'(t); kb_wr_grp = $bits(kb_wr_grp)'(g);
            kb_wr_idx = 8'(i);
            kb_wr_data = (og * TM + t < lM[l]) ? win_wgt(l, og * TM + t, g, i) : '0;
            @(negedge clk);
          end
      kb_wr_en = 1'b0;
    end
    for (int c = 0; c < COLS; c++)
      for (int i = 0; i < KK*TN; i++) begin
        ib_wr_en = 1'b1; ib_wr_bank = $bits(ib_wr_bank)'(c); ib_wr_idx = 8'(i);
        ib_wr_data = (sp * COLS + c < NPIX) ? win_act(l, sp * COLS + c, ig, i) : '0;
        @(negedge clk);
      end
    ib_wr_en = 1'b0;
    fetch_done = 1'b1;
    @(negedge clk);
    fetch_done = 1'b0;
  endtask

  // read one finished spatial tile; results of layer 0 become layer 1's input
  task automatic do_store();
    int l, og, sp, m, pix;
    longint tol, err, ex;
    l = int'(cur_layer); og = int'(cur_og); sp = int'(cur_sp);
    tol = longint'(nchg(l) * nslice(l) * KK * TN) * (64'sd3 <<< (P - 2));
    for (int t = 0; t < TM; t++)
      for (int c = 0; c < COLS; c++) begin
        m = og * TM + t; pix = sp * COLS + c;
        if (m < lM[l] && pix < NPIX) begin
          ob_rd_tile = $bits(ob_rd_tile)'(t); ob_rd_col = $bits(ob_rd_col)'(c);
          #1;
          ex  = conv_ref(l, m, pix);
          err = longint'(ob_rd_data) * (64'sd1 <<< P) - ex;
          if (err < 0) err = -err;
          check(err <= tol, $sformatf("layer %0d out-ch %0d pixel %0d: got %0d exp %0d",
                                      l, m, pix, ob_rd_data, ex >>> P));
          if (l + 1 < NLAYER) begin
            longint q;
            q = longint'(ob_rd_data) >>> 4;
            if (q > 32767) q = 32767;
            if (q < -32768) q = -32768;
            fmap[l+1][m][pix / WD][pix % WD] = P'(q);
          end
        end
      end
    n_store++;
    @(negedge clk);
    store_done = 1'b1;
    @(negedge clk);
    store_done = 1'b0;
  endtask

  initial begin
    int exp_pass, exp_store;
    cfg_layer = '0; cfg_ngrp = '0; cfg_nsp = '0; cfg_nog = '0; num_layers = 6'(NLAYER);
    ib_wr_bank = '0; ib_wr_idx = '0; ib_wr_data = '0;
    kb_wr_tile = '0; kb_wr_grp = '0; kb_wr_idx = '0; kb_wr_data = '0;
    ob_rd_tile = '0; ob_rd_col = '0;
    // data: layer-0 input and all filters random; filters kept to 2^-3
    // of full scale so that layer 1 sees moderate inputs
    for (int l = 0; l < NLAYER; l++)
      for (int ch = 0; ch < MAXN; ch++)
        for (int y = 0; y < H; y++)
          for (int x = 0; x < WD; x++)
            fmap[l][ch][y][x] = (l == 0) ? P'($urandom) : '0;
    for (int l = 0; l < NLAYER; l++)
      for (int m = 0; m < MAXM; m++)
        for (int ch = 0; ch < MAXN; ch++)
          for (int dy = 0; dy < MAXK; dy++)
            for (int dx = 0; dx < MAXK; dx++)
              filt[l][m][ch][dy][dx] = (P+1)'($signed($urandom) >>> 18);
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    exp_pass = 0; exp_store = 0;
    for (int l = 0; l < NLAYER; l++) begin
      int ng, ns, no;
      ng = nchg(l) * nslice(l);
      ns = (NPIX + COLS - 1) / COLS;
      no = (lM[l] + TM - 1) / TM;
      exp_pass += ng * ns * no; exp_store += ns * no;
      cfg_we = 1'b1; cfg_layer = 5'(l);
      cfg_ngrp = 16'(ng); cfg_nsp = 16'(ns); cfg_nog = 16'(no);
      @(negedge clk);
    end
    cfg_we = 1'b0;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin
      if (fetch_req)      do_fetch();
      else if (store_req) do_store();
      else @(negedge clk);
    end
    n_done++;
    check(n_pass == exp_pass, $sformatf("passes %0d, expected %0d", n_pass, exp_pass));
    check(n_store == exp_store, $sformatf("stores %0d, expected %0d", n_store, exp_store));
    check(n_fetch_mem > 0, "fetch from memory happened");
    check(n_fetch_buf > 0, "fetch from buffer happened");
    check(n_fetch_k > 0, "kernel fetch happened");
    check(n_accum > 0, "partial-product accumulation happened");
    check(n_slice > 0, "large-kernel slice happened");
    check(n_prec > 0, "precision counter reset happened");
    check(n_layer_inc > 0, "layer counter increment happened");
    check(n_done > 0, "end reached");
    $display("mechanisms: passes=%0d fetch_mem=%0d fetch_buf=%0d kernel_fetch=%0d accumulate=%0d kernel_slices=%0d precision_reset=%0d store=%0d layer_inc=%0d done=%0d",
             n_pass, n_fetch_mem, n_fetch_buf, n_fetch_k, n_accum, n_slice, n_prec, n_store, n_layer_inc, n_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
