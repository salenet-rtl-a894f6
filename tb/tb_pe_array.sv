// tb_pe_array: self-checking test of the 16-PE array.
//
// Each PE gets its own random activations, weights and BN record; a few are
// marked skip. After one PE cycle all 16 results are compared with values
// computed here, and valid must rise on the 8th ce edge after the start edge (9 slow cycles in all).
module tb_pe_array;
  import salenet_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;
  logic [2:0] div = '0;
  logic ce;
  assign ce = (div == 3'd4);
  always_ff @(posedge clk) div <= ce ? 3'd0 : div + 3'd1;

  logic start = 0, mode_linear = 0;
  logic skip [NPE];
  data_t x [NPE][VEC];
  weight_t w [NPE][VEC];
  bn_param_t param [NPE];
  acc_t y [NPE];
  logic valid;

  pe_array dut (.*);

  int checks = 0, failures = 0;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo, 0));
  endfunction

  longint expv [NPE];

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 12; n++) begin
      int n_ce;
      mode_linear = (n % 4 == 3);
      for (int p = 0; p < NPE; p++) begin
        longint acc, v;
        for (int i = 0; i < VEC; i++) begin
          x[p][i] = data_t'(rnd(-1000, 4000));
          w[p][i] = weight_t'(rnd(-20, 20));
        end
        param[p] = '{b: B_W'(rnd(-2048, 2047)), wbn: WBN_W'(rnd(10, 400)), beta: BETA_W'(rnd(-500, 500))};
        skip[p]  = ($urandom_range(4, 0) == 0);
        acc = 0;
        for (int i = 0; i < VEC; i++) acc += longint'(x[p][i]) * w[p][i];
        acc += param[p].b;
        if (skip[p]) expv[p] = 0;
        else if (mode_linear) expv[p] = acc;
        else begin
          v = ((acc * param[p].wbn) >>> 14) + param[p].beta;
          expv[p] = (v < 0) ? 0 : (v > 4095) ? 4095 : v;
        end
      end
      @(negedge clk iff ce);
      start = 1;
      @(posedge clk);
      #1 start = 0;
      n_ce = 0;
      while (!valid) begin
        @(posedge clk);
        if (ce) n_ce++;
        #1;
      end
      for (int p = 0; p < NPE; p++) begin
        checks++;
        if (y[p] !== acc_t'(expv[p])) begin
          failures++;
          $display("run %0d PE %0d: y=%0d expected %0d", n, p, y[p], expv[p]);
        end
      end
      checks++;
      if (n_ce != 8) begin failures++; $display("latency %0d", n_ce); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
