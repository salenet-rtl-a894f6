// weight_bram: on-chip storage of the convolution and linear weights.
//
// Organised as N_PE banks, one per PE. Row r of bank p holds the VEC = 128
// weights PE p needs for one PE cycle: for conv block l and chunk k (output
// channels 16k..16k+15) row = row_base(l) + k holds the kernel of output
// channel 16k + p, element j = ci_local * 16 + tap (ci_local = input channel
// inside the group, tap = kernel position), zero beyond Cin/g * 16. Row
// LIN_ROW holds the linear layer: bank p = class p, element j = GAP channel j.
// Conv weights are 7-bit values stored sign-extended in 8-bit words; linear
// weights use all 8 bits.
//
// Host writes are one weight per cycle; the read returns a whole row (all
// banks) one cycle after rd_row and holds it until the next read.
module weight_bram
  import salenet_pkg::*;
#(
  parameter int unsigned N_PE  = NPE,
  parameter int unsigned VEC_N = VEC,
  parameter int unsigned NROWS = ROWS,
  localparam int unsigned RW   = $clog2(NROWS),
  localparam int unsigned PW   = $clog2(N_PE),
  localparam int unsigned JW   = $clog2(VEC_N)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [RW-1:0] wr_row,
  input  logic [PW-1:0] wr_pe,
  input  logic [JW-1:0] wr_idx,
  input  weight_t       wr_data,
  input  logic          rd_en,
  input  logic [RW-1:0] rd_row,
  output weight_t       rd_data [N_PE][VEC_N]
);
  // one bank per PE; a row is one VEC_N*W_W-bit word written W_W bits at a time
  for (genvar p = 0; p < int'(N_PE); p++) begin : g_bank
    logic [VEC_N*W_W-1:0] mem [NROWS];
    logic [VEC_N*W_W-1:0] rword;
    always_ff @(posedge clk) begin
      for (int j = 0; j < int'(VEC_N); j++)   // byte-lane write enable
        if (wr_en && wr_pe == PW'(p) && wr_idx == JW'(j)) mem[wr_row][j*W_W +: W_W] <= wr_data;
      if (rd_en) rword <= mem[rd_row];
    end
    always_comb
      for (int j = 0; j < int'(VEC_N); j++) rd_data[p][j] = weight_t'(rword[j*W_W +: W_W]);
  end
endmodule
