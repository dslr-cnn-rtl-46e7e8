// tb_control_unit - self-checking testbench of the control unit (defaults:
// P = 16, TN = 16, KK = 9).
//
// Programs a two-layer table (layer 0: 3 input groups, 2 spatial tiles, 2
// output groups; layer 1: 1/1/1), starts the unit and plays the off-chip
// agent: it answers fetch and store requests after a random delay. The
// testbench checks the order of the requested passes against the loop nest
// (og, sp, ig), the source flag (memory for layer 0, buffer after), the
// kernel-fetch flag, and inside every pass the cycle positions of clr/kb_ld,
// of the P activation digits with the precision counter 0..P-1, of rec_en
// (cycles 3..18), of the output shift window (cycles 20..43, ND = 24) and of
// the commit (cycle 44) with its first flag. It ends on done.
module tb_control_unit;
  localparam int P = 16, TN = 16, KK = 9;
  localparam int FIRST = 20, LAST = 43, ND = 24;

  logic clk = 1'b0, rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [4:0] cfg_layer;
  logic [15:0] cfg_ngrp, cfg_nsp, cfg_nog;
  logic [5:0] num_layers;
  logic start = 1'b0, busy, done;
  logic fetch_req, fetch_src, fetch_kernels, fetch_done = 1'b0;
  logic [4:0] cur_layer;
  logic [15:0] cur_og, cur_sp, cur_ig;
  logic store_req, store_done = 1'b0;
  logic pe_clr, rec_en, dig_en, kb_ld, ob_shift, ob_first, ob_commit;
  logic [3:0] dig_idx;
  logic [4:0] kb_grp;
  int checks = 0, failures = 0;

  control_unit #(.P(P), .TN(TN), .KK(KK)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // expected pass list
  int ngrp [2] = '{3, 1};
  int nsp  [2] = '{2, 1};
  int nog  [2] = '{2, 1};
  int exp_l [$], exp_og [$], exp_sp [$], exp_ig [$];
  int pass_no = 0, stores = 0, prec_resets = 0;

  // in-pass monitor, sampled at negedge
  int cyc = -1;
  int dig_cnt, rec_cnt, shift_cnt;
  always @(negedge clk) begin
    if (pe_clr) begin
      check(kb_ld && kb_grp == 5'(cur_ig), "kb_ld with the group of the pass at clr");
      cyc = 0; dig_cnt = 0; rec_cnt = 0; shift_cnt = 0;
    end else if (cyc >= 0) begin
      cyc++;
      if (dig_en) begin
        check(cyc == dig_cnt + 1 && int'(dig_idx) == dig_cnt, "activation digit position");
        dig_cnt++;
        if (dig_cnt == P) prec_resets++;
      end
      if (rec_en) begin
        check(cyc == rec_cnt + 3, "rec_en position");
        rec_cnt++;
      end
      if (ob_shift) begin
        check(cyc == shift_cnt + FIRST, "output shift position");
        shift_cnt++;
      end
      if (ob_commit) begin
        check(cyc == LAST + 1, "commit cycle");
        check(dig_cnt == P && rec_cnt == P && shift_cnt == ND, "per-pass counts");
        check(ob_first == (cur_ig == 0), "first flag");
        cyc = -1;
      end
    end
  end

  initial begin
    cfg_layer = '0; cfg_ngrp = '0; cfg_nsp = '0; cfg_nog = '0; num_layers = 6'd2;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int l = 0; l < 2; l++) begin
      cfg_we = 1'b1; cfg_layer = 5'(l);
      cfg_ngrp = 16'(ngrp[l]); cfg_nsp = 16'(nsp[l]); cfg_nog = 16'(nog[l]);
      @(negedge clk);
    end
    cfg_we = 1'b0;
    for (int l = 0; l < 2; l++)
      for (int og = 0; og < nog[l]; og++)
        for (int sp = 0; sp < nsp[l]; sp++)
          for (int ig = 0; ig < ngrp[l]; ig++) begin
            exp_l.push_back(l); exp_og.push_back(og); exp_sp.push_back(sp); exp_ig.push_back(ig);
          end
    check(!busy && !done, "idle after reset");
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!done) begin
      if (fetch_req) begin
        check(pass_no < exp_l.size(), "more passes than expected");
        if (pass_no < exp_l.size()) begin
          check(int'(cur_layer) == exp_l[pass_no] && int'(cur_og) == exp_og[pass_no] &&
                int'(cur_sp) == exp_sp[pass_no] && int'(cur_ig) == exp_ig[pass_no],
                $sformatf("pass %0d indices", pass_no));
          check(fetch_src == (exp_l[pass_no] != 0), "fetch source");
          check(fetch_kernels == (exp_sp[pass_no] == 0 && exp_ig[pass_no] == 0), "kernel fetch flag");
        end
        repeat ($urandom_range(0, 3)) @(negedge clk);
        fetch_done = 1'b1;
        @(negedge clk);
        fetch_done = 1'b0;
        pass_no++;
      end else if (store_req) begin
        check(int'(cur_ig) + 1 == ngrp[cur_layer], "store after the last partial product");
        repeat ($urandom_range(0, 3)) @(negedge clk);
        store_done = 1'b1;
        @(negedge clk);
        store_done = 1'b0;
        stores++;
      end else begin
        @(negedge clk);
      end
    end
    check(pass_no == exp_l.size(), "number of passes");
    check(stores == 5, "number of stores");
    check(prec_resets == pass_no, "precision counter reset once per pass");
    @(negedge clk);
    check(!busy && done, "done and idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
