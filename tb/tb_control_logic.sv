// tb_control_logic: runs the sequencer through a full inference against
// behavioural models of the PE array (9 slow cycles per PE cycle, random
// results), of the parameter memory (registered, random beta per row/bank)
// and of the input/feature buffers (data derived from the address).
//
// Checked against values worked out here from the layer table:
//  - the PE cycles of each layer (5016, 5076, 5016, 5024, 1) and that
//    pe_start only comes with ce, which is high one cycle in five;
//  - the column loads of each block (16 + (Lout-1)*stride), their addresses
//    and which of them are zero padding;
//  - the weight/parameter row of each PE cycle;
//  - the bias-driven pruning skip flags (beta < threshold, blocks 1-3 only)
//    and the pruned total;
//  - every write-back column: address t in order, and its 64 channels equal
//    to the PE results of its 4 chunks;
//  - GAP accumulation count, the logits, the level and done.
module tb_control_logic;
  import salenet_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;

  logic start = 0, busy, done, bdp_en = 1;
  logic signed [BETA_W-1:0] bdp_thr [3];
  logic ce, pe_start, mode_linear, pe_valid;
  logic skip [NPE];
  acc_t pe_y [NPE];
  logic rd_en;
  logic [ROW_W-1:0] rd_row;
  bn_param_t param [NPE];
  logic [11:0] in_raddr;
  data_t in_rdata [IN_CH];
  logic [10:0] fm_raddr, fm_waddr;
  data_t fm_rdata [CH_MAX], fm_wdata [CH_MAX];
  logic fm_we, win_clear, win_shift;
  data_t win_col [CH_MAX];
  logic [1:0] layer;
  logic [2:0] chunk;
  logic gap_clear, gap_acc, level;
  acc_t logits [N_CLASS];
  logic [31:0] pe_cycles [NLAYER+1];
  logic [31:0] pruned;

  control_logic dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", msg);
    end
  endtask

  // ---- memory models ----
  int beta_tab [ROWS][NPE];
  int thr [3] = '{-100, -50, -200};
  always_ff @(posedge clk)
    if (rd_en)
      for (int p = 0; p < NPE; p++)
        param[p] <= '{b: '0, wbn: '0, beta: BETA_W'(beta_tab[rd_row][p])};
  always_ff @(posedge clk) begin
    for (int c = 0; c < IN_CH; c++)  in_rdata[c] <= data_t'(int'(in_raddr) % 2000 + c + 1);
    for (int c = 0; c < CH_MAX; c++) fm_rdata[c] <= data_t'(int'(fm_raddr) + 7 * c + 1);
  end

  // ---- PE array model ----
  int pe_cnt = 0;
  bit pe_busy = 0;
  acc_t y_next [NPE];
  always_ff @(posedge clk) begin
    if (pe_start) begin
      pe_busy <= 1; pe_cnt <= 0; pe_valid <= 0;
      for (int p = 0; p < NPE; p++) y_next[p] <= acc_t'($urandom_range(4095, 0));
    end else if (pe_busy && ce) begin
      pe_cnt <= pe_cnt + 1;
      if (pe_cnt == 8) begin
        pe_busy <= 0; pe_valid <= 1;
        pe_y <= y_next;
      end
    end
  end

  // ---- expected sequence ----
  int cins [4] = '{5, 64, 64, 64};
  int couts [4] = '{64, 64, 64, 128};
  int lins [4] = '{2500, 1254, 1269, 1254};
  int louts [4] = '{1254, 1269, 1254, 628};
  int strides [4] = '{2, 1, 1, 2};
  int pads [4] = '{11, 15, 0, 8};
  int bases [4] = '{0, 4, 8, 12};

  int cur_l = 0, n_loads [4], n_pad [4], exp_col [4], n_wr [4], n_pe [5], n_gap = 0, ce_gap = 0;
  int exp_pruned = 0, chunk_seen = 0;
  logic [10:0] prev_fm;
  logic [11:0] prev_in;
  bit in_lin = 0;
  int col_model [CH_MAX];
  longint last_y [N_CLASS];

  always @(posedge clk) if (rst_n) begin
    // ce is one cycle in five
    ce_gap = ce ? 0 : ce_gap + 1;
    if (ce_gap > 4) chk(0, "ce gap");
    if (pe_start) chk(ce, "pe_start without ce");
    prev_fm <= fm_raddr;
    prev_in <= in_raddr;
    if (win_shift) begin
      int col, ev;
      col = exp_col[layer];
      if (col < 0 || col >= lins[layer]) begin
        ev = 0;
        n_pad[layer]++;
      end else ev = (layer == 0) ? (col % 2000 + 1) : (col + 1);
      chk(int'(win_col[0]) == ev, $sformatf("load l%0d col %0d: %0d vs %0d", layer, col, win_col[0], ev));
      exp_col[layer]++;
      n_loads[layer]++;
    end
    if (rd_en) begin
      int er;
      er = mode_linear ? LIN_ROW : bases[layer] + int'(chunk);
      chk(int'(rd_row) == er, "row");
    end
    if (pe_start) begin
      int li;
      li = mode_linear ? 4 : int'(layer);
      n_pe[li]++;
      for (int p = 0; p < NPE; p++) begin
        bit es;
        es = !mode_linear && layer < 3 && (beta_tab[rd_row][p] < thr[layer]);
        chk(skip[p] == es, "skip");
        if (es) exp_pruned++;
      end
    end
    if (pe_valid && !pe_busy && dut.state == dut.S_STORE) begin
      if (!mode_linear && layer < 3)
        for (int p = 0; p < NPE; p++) col_model[16 * int'(chunk) + p] = int'(pe_y[p]);
      if (mode_linear) for (int k = 0; k < N_CLASS; k++) last_y[k] = pe_y[k];
    end
    if (gap_acc) n_gap++;
    if (fm_we) begin
      chk(int'(fm_waddr) == n_wr[layer], $sformatf("waddr %0d vs %0d", fm_waddr, n_wr[layer]));
      for (int c = 0; c < CH_MAX; c++) chk(int'(fm_wdata[c]) == col_model[c], "wdata");
      n_wr[layer]++;
    end
  end

  initial begin
    for (int i = 0; i < 3; i++) bdp_thr[i] = BETA_W'(thr[i]);
    for (int r = 0; r < ROWS; r++)
      for (int p = 0; p < NPE; p++) beta_tab[r][p] = int'($urandom_range(1000, 0)) - 600;
    for (int l = 0; l < 4; l++) begin
      n_loads[l] = 0; n_pad[l] = 0; n_wr[l] = 0; exp_col[l] = -pads[l];
    end
    for (int l = 0; l < 5; l++) n_pe[l] = 0;
    for (int p = 0; p < NPE; p++) pe_y[p] = '0;
    pe_valid = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk) start = 1;
    @(negedge clk) start = 0;
    @(posedge clk iff done);
    @(negedge clk);
    for (int l = 0; l < 4; l++) begin
      int exp_pad, first, last;
      first = -pads[l];
      last  = (louts[l] - 1) * strides[l] - pads[l] + 15;
      exp_pad = 0;
      for (int c = first; c <= last; c++) if (c < 0 || c >= lins[l]) exp_pad++;
      chk(n_loads[l] == 16 + (louts[l] - 1) * strides[l], $sformatf("loads l%0d %0d", l, n_loads[l]));
      chk(n_pad[l] == exp_pad, $sformatf("pad l%0d %0d vs %0d", l, n_pad[l], exp_pad));
      chk(n_pe[l] == couts[l] * louts[l] / 16, $sformatf("pe cycles l%0d %0d", l, n_pe[l]));
      chk(int'(pe_cycles[l]) == couts[l] * louts[l] / 16, "pe_cycles port");
      chk(n_wr[l] == ((l < 3) ? louts[l] : 0), $sformatf("writes l%0d %0d", l, n_wr[l]));
    end
    chk(int'(pe_cycles[0]) == 5016 && int'(pe_cycles[1]) == 5076 &&
        int'(pe_cycles[2]) == 5016 && int'(pe_cycles[3]) == 5024, "paper PE cycle counts");
    chk(n_pe[4] == 1 && pe_cycles[4] == 1, "linear PE cycle");
    chk(n_gap == 5024, "gap acc");
    chk(int'(pruned) == exp_pruned && exp_pruned > 0, $sformatf("pruned %0d vs %0d", pruned, exp_pruned));
    for (int k = 0; k < N_CLASS; k++) chk(longint'(logits[k]) == last_y[k], "logit");
    chk(level == (last_y[1] > last_y[0]), "level");
    chk(!busy, "idle after done");
    $display("pad loads %0d %0d %0d %0d, pruned %0d", n_pad[0], n_pad[1], n_pad[2], n_pad[3], pruned);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
