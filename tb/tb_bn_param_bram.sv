// tb_bn_param_bram: writes a random folded-BN record to every (row, bank),
// reads every row back and compares b, w_BN and beta of all 16 banks.
module tb_bn_param_bram;
  import salenet_pkg::*;

  logic clk = 1'b0;
  always #10 clk = ~clk;

  logic wr_en = 0, rd_en = 0;
  logic [ROW_W-1:0] wr_row = '0, rd_row = '0;
  logic [3:0] wr_pe = '0;
  bn_param_t wr_data = '0;
  bn_param_t rd_data [NPE];

  bn_param_bram dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bn_param_t model [ROWS][NPE];

  initial begin
    for (int r = 0; r < ROWS; r++)
      for (int p = 0; p < NPE; p++) begin
        @(negedge clk);
        wr_en = 1; wr_row = ROW_W'(r); wr_pe = 4'(p);
        wr_data = bn_param_t'({$urandom, $urandom});
        model[r][p] = wr_data;
      end
    @(negedge clk) wr_en = 0;
    for (int n = 0; n < 3 * ROWS; n++) begin
      int r;
      r = n % ROWS;
      @(negedge clk) begin rd_en = 1; rd_row = ROW_W'(r); end
      @(negedge clk) rd_en = 0;
      for (int p = 0; p < NPE; p++) begin
        checks += 3;
        if (rd_data[p].b    !== model[r][p].b)    failures++;
        if (rd_data[p].wbn  !== model[r][p].wbn)  failures++;
        if (rd_data[p].beta !== model[r][p].beta) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
