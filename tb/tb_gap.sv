// tb_gap: accumulates 628 positions x 8 chunks of random ReLU outputs
// (0..4095) as conv block 4 delivers them and checks all 128 averages
// against floor(sum * 26715 / 2^24), 26715 = round(2^24 / 628); then checks
// that clear restarts the sums, with a second, shorter run.
module tb_gap;
  import salenet_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;

  logic clear = 0, acc = 0;
  logic [2:0] chunk = '0;
  acc_t y [NPE];
  data_t avg [GAP_CH];

  gap dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  longint sums [GAP_CH];

  task automatic run(int npos, bit big);
    for (int c = 0; c < GAP_CH; c++) sums[c] = 0;
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    for (int t = 0; t < npos; t++)
      for (int k = 0; k < 8; k++) begin
        @(negedge clk);
        acc = 1; chunk = 3'(k);
        for (int p = 0; p < NPE; p++) begin
          y[p] = acc_t'(big ? 4095 - int'($urandom_range(200, 0)) : int'($urandom_range(4095, 0)));
          sums[16 * k + p] += y[p];
        end
      end
    @(negedge clk) acc = 0;
    for (int c = 0; c < GAP_CH; c++) begin
      longint e;
      e = (sums[c] * 26715) / (longint'(1) << 24);
      checks++;
      if (longint'(avg[c]) != e) begin
        failures++;
        if (failures < 10) $display("ch %0d: %0d vs %0d", c, avg[c], e);
      end
    end
  endtask

  initial begin
    for (int p = 0; p < NPE; p++) y[p] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(628, 0);
    run(628, 1);
    run(100, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
