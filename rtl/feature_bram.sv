// feature_bram: the shared on-chip buffer for the output maps of conv blocks
// 1, 2 and 3.
//
// All three maps occupy the same storage: one address holds one map column
// (CH = 64 channels of DATA_W bits), so the buffer is DEPTH = 1269 columns
// deep, the length of the longest map, 1269 x 64 x 13 b = 1.06 Mb. The
// controller writes output column t of a block to address t after the
// sliding window has already read every input column that a later output
// still needs, so a block can overwrite its own input map in place.
//
// Simple dual port, as a block RAM: a synchronous read (rdata valid the cycle
// after raddr) and a synchronous column write. A read and a write of the same
// address in one cycle return the old contents. Sharing the space follows the
// paper; the column-per-word organisation is this design's choice.
module feature_bram
  import salenet_pkg::*;
#(
  parameter int unsigned DEPTH = FM_DEPTH,
  parameter int unsigned CH    = CH_MAX,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic [AW-1:0] raddr,
  output data_t         rdata [CH],
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  data_t         wdata [CH]
);
  logic [CH*DATA_W-1:0] mem [DEPTH];
  logic [CH*DATA_W-1:0] rword, wword;

  always_comb
    for (int c = 0; c < int'(CH); c++) wword[c*DATA_W +: DATA_W] = wdata[c];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wword;
    rword <= mem[raddr];
  end

  always_comb
    for (int c = 0; c < int'(CH); c++) rdata[c] = data_t'(rword[c*DATA_W +: DATA_W]);

  a_waddr_range: assert property (@(posedge clk) we |-> (32'(waddr) < DEPTH));
endmodule
