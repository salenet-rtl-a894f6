// gap: global average pooling over the conv block 4 output map.
//
// The output map of the last conv block is never stored: each PE cycle of
// that block yields 16 channels of one position, and acc adds them into the
// running sums of channels 16*chunk .. 16*chunk+15. After all GAP_LEN = 628
// positions, avg[c] = (sum[c] * GAP_RECIP) >>> GAP_FRAC with
// GAP_RECIP = round(2^24 / 628), a constant multiply standing in for the
// division by 628 (this design's choice; the paper names only the GAP layer).
// Inputs are ReLU outputs, so sums are non-negative and fit
// DATA_W + ceil(log2 628) bits.
//
// Timing: clear and acc act at the clock edge; avg is combinational.
module gap
  import salenet_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       acc,
  input  logic [2:0] chunk,
  input  acc_t       y [NPE],
  output data_t      avg [GAP_CH]
);
  logic signed [GAP_SUM_W-1:0] sum [GAP_CH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < GAP_CH; c++) sum[c] <= '0;
    end else if (clear) begin
      for (int c = 0; c < GAP_CH; c++) sum[c] <= '0;
    end else if (acc) begin
      for (int p = 0; p < NPE; p++)
        sum[{chunk, 4'(p)}] <= sum[{chunk, 4'(p)}] + GAP_SUM_W'(y[p]);
    end
  end

  always_comb begin
    for (int c = 0; c < GAP_CH; c++) begin
      logic signed [GAP_SUM_W+16:0] prod;
      prod   = (GAP_SUM_W+17)'(sum[c]) * (GAP_SUM_W+17)'(GAP_RECIP);
      avg[c] = data_t'(prod >>> GAP_FRAC);
    end
  end
endmodule
