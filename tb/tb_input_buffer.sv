// tb_input_buffer: writes a random 5 x 2500 EEG window sample by sample and
// reads random columns back (one cycle latency), comparing all 5 channels.
module tb_input_buffer;
  import salenet_pkg::*;

  logic clk = 1'b0;
  always #10 clk = ~clk;

  logic wr_en = 0;
  logic [11:0] wr_col = '0, raddr = '0;
  logic [2:0] wr_ch = '0;
  data_t wr_data = '0;
  data_t rdata [IN_CH];

  input_buffer dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int model [IN_CH][IN_LEN];

  initial begin
    for (int t = 0; t < IN_LEN; t++)
      for (int c = 0; c < IN_CH; c++) begin
        @(negedge clk);
        wr_en = 1; wr_col = 12'(t); wr_ch = 3'(c);
        wr_data = data_t'($urandom);
        model[c][t] = int'(wr_data);
      end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      int a;
      a = (n < IN_LEN) ? n : int'($urandom_range(IN_LEN - 1, 0));
      @(negedge clk) raddr = 12'(a);
      @(negedge clk);
      for (int c = 0; c < IN_CH; c++) begin
        checks++;
        if (int'(rdata[c]) != model[c][a]) begin
          failures++;
          if (failures < 10) $display("col %0d ch %0d: %0d vs %0d", a, c, rdata[c], model[c][a]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
