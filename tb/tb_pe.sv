// tb_pe: self-checking test of one process engine.
//
// Random 128-element activation/weight vectors in conv mode (folded BN,
// ReLU, saturation), linear mode (acc + b only) and with skip (pruned
// channel, output 0). The expected value is computed here from the PE
// equation; the latency from start to valid is checked to be 9 slow-domain
// (ce) cycles counting the start cycle: one product load, log2(128) = 7 adder-tree passes, one
// BN/ReLU stage.
module tb_pe;
  import salenet_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #10 clk = ~clk;
  logic [2:0] div = '0;
  logic ce;
  assign ce = (div == 3'd4);
  always_ff @(posedge clk) div <= ce ? 3'd0 : div + 3'd1;

  logic start = 0, mode_linear = 0, skip = 0;
  data_t   x [VEC];
  weight_t w [VEC];
  logic signed [B_W-1:0]    b = '0;
  logic signed [WBN_W-1:0]  wbn = '0;
  logic signed [BETA_W-1:0] beta = '0;
  acc_t y;
  logic valid;

  pe dut (.*);

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

  task automatic run_one(int mode);   // 0 conv, 1 linear, 2 skip
    longint acc, v, expv;
    int n_ce;
    for (int i = 0; i < VEC; i++) begin
      x[i] = data_t'(($urandom_range(3, 0) == 0) ? rnd(-4096, 4095) : rnd(0, 3000));
      w[i] = weight_t'(($urandom_range(3, 0) == 0) ? rnd(-128, 127) : rnd(-5, 5));
    end
    b    = B_W'(rnd(-2048, 2047));
    wbn  = WBN_W'(($urandom_range(9, 0) == 0) ? rnd(-32768, 32767) : rnd(50, 2000));
    beta = BETA_W'(rnd(-8192, 8191));
    mode_linear = (mode == 1);
    skip        = (mode == 2);
    acc = 0;
    for (int i = 0; i < VEC; i++) acc += longint'(x[i]) * longint'(w[i]);
    acc += b;
    if (mode == 2)      expv = 0;
    else if (mode == 1) expv = acc;
    else begin
      v = ((acc * wbn) >>> 14) + beta;
      expv = (v < 0) ? 0 : (v > 4095) ? 4095 : v;
    end
    // start on a ce cycle
    @(negedge clk iff ce);
    start = 1;
    @(posedge clk);
    #1 start = 0;
    for (int i = 0; i < VEC; i++) begin x[i] = '0; w[i] = '0; end  // operands no longer needed
    n_ce = 0;
    while (!valid) begin
      @(posedge clk);
      if (ce) n_ce++;
      #1;
    end
    checks++;
    if (y !== acc_t'(expv)) begin
      failures++;
      $display("mode %0d: y=%0d expected %0d", mode, y, expv);
    end
    checks++;
    if (n_ce != 8) begin
      failures++;
      $display("latency %0d ce cycles after the start edge, expected 8", n_ce);
    end
  endtask

  initial begin
    for (int i = 0; i < VEC; i++) begin x[i] = '0; w[i] = '0; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 60; n++) run_one(n % 3);
    for (int n = 0; n < 40; n++) run_one(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
