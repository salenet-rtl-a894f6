// tb_salenet_top: end-to-end test of the SaleNet accelerator at its full
// size (5 x 2500 EEG window, four conv blocks, GAP, linear layer).
//
// It writes random weights (half of them zero, as after near-zero pruning),
// random folded BN records, random linear weights and a random EEG window
// through the host ports, runs an inference and compares against a
// reference written here from the network equations (group convolution
// with the boundaries s = (i // (Cout/g)) * (Cin/g), e = s + Cin/g - 1,
// zero padding, (acc + b) * w_BN >>> 14 + beta, ReLU with saturation to
// 13 bits, bias-driven pruning, average over 628 positions, linear layer).
// Checked: both logits and the level, the 128 GAP outputs, the whole
// conv block 3 output map left in the shared feature buffer, the PE cycle
// count of each layer against the paper's 5016 / 5076 / 5016 / 5024 / 1, and
// the number of pruned channel evaluations. It also counts how often each
// mechanism occurred (zero-padding loads, in-place write-back, pruning,
// ReLU clamp to 0, saturation, GAP accumulation, linear mode) and fails if
// one never did. A second inference then follows on a new EEG window with
// bias-driven pruning switched off (bdp_en = 0), checking the restart and
// that no channel is skipped.
module tb_salenet_top;
  import salenet_pkg::*;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #10 clk = ~clk;   // 50 MHz

  logic                     eeg_we = 1'b0, w_we = 1'b0, p_we = 1'b0;
  logic [11:0]              eeg_col = '0;
  logic [2:0]               eeg_ch = '0;
  data_t                    eeg_data = '0;
  logic [ROW_W-1:0]         w_row = '0, p_row = '0;
  logic [3:0]               w_pe = '0, p_pe = '0;
  logic [6:0]               w_idx = '0;
  weight_t                  w_data = '0;
  bn_param_t                p_data = '0;
  logic                     bdp_en = 1'b1;
  logic signed [BETA_W-1:0] bdp_thr [3];
  logic                     start = 1'b0;
  logic                     busy, done, level;
  acc_t                     logits [N_CLASS];
  logic [31:0]              pe_cycles [NLAYER+1];
  logic [31:0]              pruned;

  salenet_top dut (.*);

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // watchdog
  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model state ----------------
  int eeg   [5][2500];
  int wconv [4][128][8][16];           // [layer][oc][ci in group][tap]
  int pb    [4][128], pw [4][128], pbeta [4][128];
  int wl    [2][128], bl [2];
  int fa    [64][2500], fb [128][1269];
  int gavg  [128];
  longint ref_logit [2];
  int n_pad_ref = 0, n_clamp0 = 0, n_sat = 0, n_pruned_ref = 0;
  int thr [3] = '{-400, -350, -450};
  bit bdp_on = 1;

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo, 0));
  endfunction

  function automatic int cin_g(int l);
    return (l == 0) ? 5 : (l == 3) ? 4 : 8;
  endfunction

  // reference for one conv block, from fa (input) to fb (output)
  task automatic ref_layer(int l, int cin, int cout, int g, int lin, int lout,
                           int stride, int pad);
    int cig, cog;
    cig = cin / g;
    cog = cout / g;
    for (int oc = 0; oc < cout; oc++) begin
      int s;
      bit pr;
      s  = (oc / cog) * cig;
      pr = bdp_on && (l < 3) && (pbeta[l][oc] < thr[l]);
      for (int t = 0; t < lout; t++) begin
        longint acc, v;
        if (pr) begin
          fb[oc][t] = 0;
          if (t == 0) n_pruned_ref += lout;
          continue;
        end
        acc = 0;
        for (int ci = 0; ci < cig; ci++)
          for (int k = 0; k < 16; k++) begin
            int pos;
            pos = t * stride - pad + k;
            if (pos >= 0 && pos < lin) acc += longint'(fa[s + ci][pos]) * wconv[l][oc][ci][k];
          end
        v = ((acc + pb[l][oc]) * pw[l][oc]);
        v = (v >>> 14) + pbeta[l][oc];
        if (v <= 0) begin fb[oc][t] = 0; n_clamp0++; end
        else if (v > 4095) begin fb[oc][t] = 4095; n_sat++; end
        else fb[oc][t] = int'(v);
      end
    end
  endtask

  // ---------------- host writes ----------------
  task automatic load_eeg();
    for (int c = 0; c < 5; c++)
      for (int t = 0; t < 2500; t++) begin
        eeg[c][t] = rnd(-2300, 1900);
        @(negedge clk);
        eeg_we = 1; eeg_col = 12'(t); eeg_ch = 3'(c); eeg_data = data_t'(eeg[c][t]);
      end
    @(negedge clk) eeg_we = 0;
  endtask

  task automatic load_params();
    // conv weights and BN records
    for (int l = 0; l < 4; l++) begin
      layer_cfg_t cf;
      cf = layer_cfg(l);
      for (int oc = 0; oc < int'(cf.cout); oc++) begin
        for (int ci = 0; ci < 8; ci++)
          for (int k = 0; k < 16; k++) begin
            if (ci >= cin_g(l) || $urandom_range(1, 0) == 0) wconv[l][oc][ci][k] = 0;
            else if ($urandom_range(49, 0) == 0) wconv[l][oc][ci][k] = rnd(-64, 63);
            else wconv[l][oc][ci][k] = rnd(-4, 4);
          end
        pb[l][oc]    = rnd(-2048, 2047);
        pw[l][oc]    = ($urandom_range(19, 0) == 0) ? rnd(8000, 32000) : rnd(100, 1500);
        if ($urandom_range(29, 0) == 0) pw[l][oc] = -pw[l][oc];
        pbeta[l][oc] = rnd(-600, 600);
        for (int j = 0; j < 128; j++) begin
          @(negedge clk);
          w_we = 1; w_row = ROW_W'(int'(cf.row_base) + oc / 16); w_pe = 4'(oc % 16); w_idx = 7'(j);
          w_data = weight_t'(wconv[l][oc][j / 16][j % 16]);
        end
        @(negedge clk);
        w_we = 0;
        p_we = 1; p_row = ROW_W'(int'(cf.row_base) + oc / 16); p_pe = 4'(oc % 16);
        p_data = '{b: B_W'(pb[l][oc]), wbn: WBN_W'(pw[l][oc]), beta: BETA_W'(pbeta[l][oc])};
        @(negedge clk) p_we = 0;
      end
    end
    // linear layer (row 20, banks 0 and 1; other banks zero)
    for (int pe_i = 0; pe_i < 16; pe_i++) begin
      if (pe_i < 2) bl[pe_i] = rnd(-1023, 1023);
      for (int j = 0; j < 128; j++) begin
        if (pe_i < 2) wl[pe_i][j] = rnd(-128, 127);
        @(negedge clk);
        w_we = 1; w_row = ROW_W'(LIN_ROW); w_pe = 4'(pe_i); w_idx = 7'(j);
        w_data = (pe_i < 2) ? weight_t'(wl[pe_i][j]) : '0;
      end
      @(negedge clk);
      w_we = 0;
      p_we = 1; p_row = ROW_W'(LIN_ROW); p_pe = 4'(pe_i);
      p_data = '{b: (pe_i < 2) ? B_W'(bl[pe_i]) : '0, wbn: '0, beta: '0};
      @(negedge clk) p_we = 0;
    end
  endtask

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("MISMATCH %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ---------------- mechanism counters from the design ----------------
  int n_pad_loads = 0, n_fm_writes = 0, n_gap_acc = 0, n_lin = 0;
  always @(posedge clk) begin
    if (dut.u_ctrl.win_shift && !dut.u_ctrl.col_ok) n_pad_loads++;
    if (dut.fm_we) n_fm_writes++;
    if (dut.gap_acc) n_gap_acc++;
    if (dut.pe_start && dut.mode_linear) n_lin++;
  end

  int exp_cyc [5] = '{5016, 5076, 5016, 5024, 1};
  int n_fm_writes_1 = 0, n_pruned_run1 = 0;
  always @(posedge clk) if (done && bdp_en) n_pruned_run1 <= int'(pruned);
  longint t0, t1;

  task automatic reference();
    n_pruned_ref = 0;
    for (int c = 0; c < 64; c++)
      for (int t = 0; t < 2500; t++) fa[c][t] = (c < 5) ? eeg[c][t] : 0;
    for (int l = 0; l < 4; l++) begin
      layer_cfg_t cf;
      cf = layer_cfg(l);
      ref_layer(l, int'(cf.cin), int'(cf.cout), int'(cf.groups), int'(cf.lin),
                int'(cf.lout), int'(cf.stride), int'(cf.pad));
      if (l < 3)   // next block's input; after block 3 it is kept for the buffer check
        for (int c = 0; c < 64; c++)
          for (int t = 0; t < 1269; t++) fa[c][t] = fb[c][t];
    end
    for (int c = 0; c < 128; c++) begin
      longint s;
      s = 0;
      for (int t = 0; t < 628; t++) s += fb[c][t];
      gavg[c] = int'((s * 26715) >>> 24);   // 26715 = round(2^24 / 628)
    end
    for (int k = 0; k < 2; k++) begin
      ref_logit[k] = bl[k];
      for (int j = 0; j < 128; j++) ref_logit[k] += longint'(gavg[j]) * wl[k][j];
    end
  endtask

  // one inference, checked against the reference
  task automatic run_and_check(int run);
    reference();
    @(negedge clk) start = 1;
    t0 = cyc;
    @(negedge clk) start = 0;
    @(posedge clk iff done);
    t1 = cyc;
    @(negedge clk);
    $display("run %0d (pruning %0s): inference took %0d cycles (%0.2f ms at 50 MHz)", run,
             bdp_on ? "on" : "off", t1 - t0, real'(t1 - t0) * 20e-6);
    for (int k = 0; k < 2; k++) check($sformatf("logit%0d", k), logits[k], ref_logit[k]);
    check("level", longint'(level), longint'(ref_logit[1] > ref_logit[0]));
    for (int c = 0; c < 128; c++) check($sformatf("gap%0d", c), dut.u_gap.avg[c], gavg[c]);
    for (int t = 0; t < 1254; t++)
      for (int c = 0; c < 64; c++)
        check($sformatf("fmap3[%0d][%0d]", c, t),
              longint'(data_t'(dut.u_fmap.mem[t][c*DATA_W +: DATA_W])), fa[c][t]);
    for (int l = 0; l < 5; l++) check($sformatf("pe_cycles%0d", l), pe_cycles[l], exp_cyc[l]);
    check("pruned", pruned, n_pruned_ref);
    $display("logits %0d %0d level %0d pruned %0d", logits[0], logits[1], level, pruned);
  endtask

  initial begin
    for (int i = 0; i < 3; i++) bdp_thr[i] = BETA_W'(thr[i]);
    repeat (3) @(negedge clk);
    rst_n = 1;
    load_eeg();
    load_params();
    bdp_on = 1; bdp_en = 1;
    run_and_check(1);
    n_fm_writes_1 = n_fm_writes;
    // second inference: new EEG window, pruning switched off
    load_eeg();
    bdp_on = 0; bdp_en = 0;
    run_and_check(2);
    if (pruned != 0) begin failures++; $display("pruning while disabled"); end

    $display("mechanisms: pad_loads=%0d inplace_writes=%0d pruned_run1=%0d relu0=%0d sat=%0d gap_acc=%0d linear=%0d restarts=1",
             n_pad_loads, n_fm_writes, n_pruned_run1, n_clamp0, n_sat, n_gap_acc, n_lin);
    if (n_pad_loads == 0) begin failures++; $display("no padding load"); end
    if (n_fm_writes_1 != 1254 + 1269 + 1254) begin failures++; $display("in-place writes %0d", n_fm_writes_1); end
    if (n_pruned_run1 == 0) begin failures++; $display("no pruning"); end
    if (n_clamp0 == 0)    begin failures++; $display("no ReLU clamp"); end
    if (n_sat == 0)       begin failures++; $display("no saturation"); end
    if (n_gap_acc != 2 * 5024) begin failures++; $display("gap acc %0d", n_gap_acc); end
    if (n_lin != 2)       begin failures++; $display("linear %0d", n_lin); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
