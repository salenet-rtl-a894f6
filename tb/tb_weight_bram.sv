// tb_weight_bram: fills every (row, PE bank, element) with a random weight,
// then reads each row and compares all 16 x 128 weights; also checks that
// the read data holds while rd_en is low.
module tb_weight_bram;
  import salenet_pkg::*;

  logic clk = 1'b0;
  always #10 clk = ~clk;

  logic wr_en = 0, rd_en = 0;
  logic [ROW_W-1:0] wr_row = '0, rd_row = '0;
  logic [3:0] wr_pe = '0;
  logic [6:0] wr_idx = '0;
  weight_t wr_data = '0;
  weight_t rd_data [NPE][VEC];

  weight_bram dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int model [ROWS][NPE][VEC];

  task automatic cmp(int r);
    for (int p = 0; p < NPE; p++)
      for (int j = 0; j < VEC; j++) begin
        checks++;
        if (int'(rd_data[p][j]) != model[r][p][j]) begin
          failures++;
          if (failures < 10) $display("row %0d pe %0d j %0d: %0d vs %0d", r, p, j, rd_data[p][j], model[r][p][j]);
        end
      end
  endtask

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int p = 0; p < NPE; p++)
        for (int j = 0; j < VEC; j++) begin
          @(negedge clk);
          wr_en = 1; wr_row = ROW_W'(r); wr_pe = 4'(p); wr_idx = 7'(j);
          wr_data = weight_t'($urandom);
          model[r][p][j] = int'(wr_data);
        end
    @(negedge clk) wr_en = 0;
    for (int r = ROWS - 1; r >= 0; r--) begin
      @(negedge clk) begin rd_en = 1; rd_row = ROW_W'(r); end
      @(negedge clk) rd_en = 0;
      cmp(r);
      rd_row = ROW_W'((r + 1) % ROWS);
      @(negedge clk);
      cmp(r);    // held while rd_en is low
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
