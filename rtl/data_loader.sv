// data_loader: sliding input window and group-convolution slice selection.
//
// The window holds the KSIZE = 16 most recent input-map columns (all CH_MAX
// channels), win[0] being the oldest. For output position t of a conv block
// with stride s and padding pad, win[k] is input column t*s - pad + k; the
// controller fills it with 16 column loads at the start of a block and
// advances it with s loads per output position, shifting in zero columns
// where the index falls into the padding. The column loads run in the fast
// (50 MHz) domain, as in the paper, and every input column is read from the
// feature buffer exactly once, which is what lets a block overwrite its own
// input map in place.
//
// Slice selection implements the group convolution boundaries
//   s_i = (i // (Cout/g)) * (Cin/g),  e_i = s_i + Cin/g - 1
// for output channel i = 16*chunk + p handled by PE p: element
// j = ci*16 + tap of PE p's 128-element vector is win[tap][s_i + ci] for
// ci < Cin/g and zero otherwise (conv block 1: 5*16 = 80 used, blocks 2-3:
// 8*16 = 128, block 4: 4*16 = 64). In linear mode every PE gets the 128 GAP
// outputs. The element order (channel-major) is this design's choice and
// must match the weight layout in weight_bram.
//
// Timing: clear and shift act at the clock edge; x is combinational from the
// window, layer, chunk and mode.
module data_loader
  import salenet_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       clear,
  input  logic       shift,
  input  data_t      col_in [CH_MAX],
  input  logic [1:0] layer,
  input  logic [2:0] chunk,
  input  logic       mode_linear,
  input  data_t      gap_avg [GAP_CH],
  output data_t      x [NPE][VEC]
);
  data_t win [KSIZE][CH_MAX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < KSIZE; k++)
        for (int c = 0; c < CH_MAX; c++) win[k][c] <= '0;
    end else if (clear) begin
      for (int k = 0; k < KSIZE; k++)
        for (int c = 0; c < CH_MAX; c++) win[k][c] <= '0;
    end else if (shift) begin
      for (int k = 0; k < KSIZE - 1; k++) win[k] <= win[k+1];
      win[KSIZE-1] <= col_in;
    end
  end

  // first input channel of each PE's group and channels per group
  logic [5:0] grp_base [NPE];
  logic [3:0] cin_g;
  always_comb begin
    // output channel oc = 16*chunk + p; with Cout/g = 8 in blocks 2-4 the
    // group index oc/8 is {chunk, p[3]}
    for (int p = 0; p < NPE; p++) begin
      case (layer)
        2'd0:    grp_base[p] = 6'd0;                                   // g = 1
        2'd1,
        2'd2:    grp_base[p] = {chunk[1:0], 1'(p >> 3), 3'b000};       // g = 8: (oc/8)*8
        default: grp_base[p] = {chunk, 1'(p >> 3), 2'b00};             // g = 16: (oc/8)*4
      endcase
    end
    case (layer)
      2'd0:    cin_g = 4'd5;
      2'd1,
      2'd2:    cin_g = 4'd8;
      default: cin_g = 4'd4;
    endcase
  end

  always_comb begin
    for (int p = 0; p < NPE; p++) begin
      for (int j = 0; j < VEC; j++) begin
        if (mode_linear) begin
          x[p][j] = gap_avg[j];
        end else if ((j / KSIZE) < int'(cin_g)) begin
          x[p][j] = win[j % KSIZE][6'(int'(grp_base[p]) + j / KSIZE)];
        end else begin
          x[p][j] = '0;
        end
      end
    end
  end
endmodule
