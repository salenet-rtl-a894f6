// tb_feature_bram: write random 64-channel columns to random addresses of
// the shared feature buffer, then read them back (one cycle read latency)
// and compare with a copy kept here; also checks that a read in the cycle of
// a write to the same address returns the old column.
module tb_feature_bram;
  import salenet_pkg::*;

  logic clk = 1'b0;
  always #10 clk = ~clk;

  logic [10:0] raddr = '0, waddr = '0;
  logic we = 0;
  data_t rdata [CH_MAX], wdata [CH_MAX];

  feature_bram dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int model [FM_DEPTH][CH_MAX];
  bit written [FM_DEPTH];

  initial begin
    for (int a = 0; a < FM_DEPTH; a++) written[a] = 0;
    for (int c = 0; c < CH_MAX; c++) wdata[c] = '0;
    // write every address once, some twice
    for (int n = 0; n < FM_DEPTH + 300; n++) begin
      int a;
      a = (n < FM_DEPTH) ? n : int'($urandom_range(FM_DEPTH - 1, 0));
      @(negedge clk);
      we = 1; waddr = 11'(a);
      for (int c = 0; c < CH_MAX; c++) begin
        wdata[c] = data_t'($urandom);
        model[a][c] = int'(wdata[c]);
      end
      written[a] = 1;
    end
    @(negedge clk) we = 0;
    for (int n = 0; n < 2000; n++) begin
      int a;
      a = int'($urandom_range(FM_DEPTH - 1, 0));
      @(negedge clk) raddr = 11'(a);
      @(negedge clk);
      for (int c = 0; c < CH_MAX; c++) begin
        checks++;
        if (int'(rdata[c]) != model[a][c]) begin
          failures++;
          if (failures < 10) $display("addr %0d ch %0d: %0d vs %0d", a, c, rdata[c], model[a][c]);
        end
      end
    end
    // read-during-write returns old data
    @(negedge clk);
    raddr = 11'd7; waddr = 11'd7; we = 1;
    for (int c = 0; c < CH_MAX; c++) wdata[c] = data_t'(c + 1);
    @(negedge clk) we = 0;
    for (int c = 0; c < CH_MAX; c++) begin
      checks++;
      if (int'(rdata[c]) != model[7][c]) failures++;
    end
    @(negedge clk);
    for (int c = 0; c < CH_MAX; c++) begin
      checks++;
      if (int'(rdata[c]) != c + 1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
