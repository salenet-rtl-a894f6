// tb_data_loader: self-checking test of the sliding window and the group
// convolution slice selection.
//
// Random columns are shifted in; after each step the 16 x 128 activation
// slice is checked for every layer and chunk against a reference that
// applies the group boundaries s = (i // (Cout/g)) * (Cin/g),
// e = s + Cin/g - 1 with division, element j = ci*16 + tap. Also checked:
// clear empties the window, and linear mode hands the GAP outputs to all PEs.
module tb_data_loader;
  import salenet_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;

  logic clear = 0, shift = 0, mode_linear = 0;
  data_t col_in [CH_MAX];
  logic [1:0] layer = '0;
  logic [2:0] chunk = '0;
  data_t gap_avg [GAP_CH];
  data_t x [NPE][VEC];

  data_loader dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int win [16][CH_MAX];
  int cins [4] = '{5, 64, 64, 64};
  int couts [4] = '{64, 64, 64, 128};
  int gs [4] = '{1, 8, 8, 16};

  task automatic check_all();
    for (int l = 0; l < 4; l++)
      for (int k = 0; k < couts[l] / 16; k++) begin
        layer = 2'(l); chunk = 3'(k);
        #1;
        for (int p = 0; p < NPE; p++) begin
          int oc, cig, cog, s;
          oc = 16 * k + p;
          cig = cins[l] / gs[l];
          cog = couts[l] / gs[l];
          s = (oc / cog) * cig;
          for (int j = 0; j < VEC; j++) begin
            int ci, tap, e;
            ci = j / 16; tap = j % 16;
            e = (ci < cig) ? win[tap][s + ci] : 0;
            checks++;
            if (int'(x[p][j]) != e) begin
              failures++;
              if (failures < 10) $display("l%0d k%0d p%0d j%0d: %0d vs %0d", l, k, p, j, x[p][j], e);
            end
          end
        end
      end
  endtask

  initial begin
    for (int c = 0; c < CH_MAX; c++) col_in[c] = '0;
    for (int c = 0; c < GAP_CH; c++) gap_avg[c] = data_t'($urandom);
    for (int k = 0; k < 16; k++) for (int c = 0; c < CH_MAX; c++) win[k][c] = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    check_all();
    for (int n = 0; n < 40; n++) begin
      @(negedge clk);
      shift = 1;
      for (int c = 0; c < CH_MAX; c++) col_in[c] = data_t'($urandom);
      for (int k = 0; k < 15; k++) win[k] = win[k+1];
      for (int c = 0; c < CH_MAX; c++) win[15][c] = int'(col_in[c]);
      @(negedge clk) shift = 0;
      if (n % 7 == 6 || n == 39) check_all();
    end
    // linear mode
    mode_linear = 1;
    #1;
    for (int p = 0; p < NPE; p++)
      for (int j = 0; j < VEC; j++) begin
        checks++;
        if (x[p][j] !== gap_avg[j]) failures++;
      end
    mode_linear = 0;
    // clear
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int k = 0; k < 16; k++) for (int c = 0; c < CH_MAX; c++) win[k][c] = 0;
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
