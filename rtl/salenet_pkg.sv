// salenet_pkg: constants, layer table and small helpers shared by the SaleNet
// accelerator. SaleNet is a four-block 1-d CNN (conv + batch norm + ReLU per
// block, kernel 16) followed by global average pooling and a 128->2 linear
// layer, classifying 5-channel prefrontal EEG (2500 samples) into two
// sustained-attention levels.
//
// Taken from the paper: 16 PEs of 128 multipliers each, kernel size 16, the
// map shapes (5,2500) (64,1254) (64,1269) (64,1254) (128,628) (128) (2), group
// numbers 1/8/8/16, parameter widths (conv weight 7 b, conv bias 8 b, BN weight
// 16 b, BN bias 14 b, linear weight 8 b, linear bias 11 b), 50 MHz / 10 MHz
// clocking. Own choices: stride and zero padding of each layer (the smallest
// that reproduce the published map lengths), the activation width (13 b), the
// accumulator width, the fixed-point BN scaling (>>> OUT_SHIFT) and the
// storage of all weights as 8-bit signed words.
package salenet_pkg;

  localparam int NPE       = 16;   // PEs in the array
  localparam int VEC       = 128;  // multipliers per PE (inner product length)
  localparam int KSIZE     = 16;   // convolution kernel size
  localparam int NLAYER    = 4;    // conv blocks
  localparam int CH_MAX    = 64;   // channels stored per feature-map column
  localparam int IN_CH     = 5;    // EEG channels
  localparam int IN_LEN    = 2500; // EEG samples per inference
  localparam int FM_DEPTH  = 1269; // longest stored map (conv block 2 output)
  localparam int GAP_CH    = 128;  // conv block 4 output channels
  localparam int GAP_LEN   = 628;  // conv block 4 output length
  localparam int N_CLASS   = 2;    // attention levels

  localparam int DATA_W    = 13;   // activation width (signed)
  localparam int W_W       = 8;    // stored weight width (signed)
  localparam int B_W       = 12;   // b = bias - E[x] width (signed)
  localparam int WBN_W     = 16;   // w_BN width (signed)
  localparam int BETA_W    = 14;   // beta width (signed)
  localparam int ACC_W     = 28;   // accumulator / PE result width
  localparam int OUT_SHIFT = 14;   // w_BN fraction bits
  localparam int SLOW_DIV  = 5;    // 50 MHz / 10 MHz
  localparam int DATA_MAX  = (1 << (DATA_W - 1)) - 1;

  // weight / BN-parameter rows: one per (layer, 16-channel chunk)
  localparam int ROWS      = 21;   // 4 + 4 + 4 + 8 conv chunks, 1 linear
  localparam int LIN_ROW   = 20;
  localparam int ROW_W     = $clog2(ROWS);

  // GAP: average = (sum * GAP_RECIP) >>> GAP_FRAC, GAP_RECIP = round(2^24/628)
  localparam int GAP_FRAC  = 24;
  localparam int GAP_RECIP = ((1 << GAP_FRAC) + GAP_LEN / 2) / GAP_LEN;
  localparam int GAP_SUM_W = DATA_W + $clog2(GAP_LEN);

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [W_W-1:0]    weight_t;
  typedef logic signed [ACC_W-1:0]  acc_t;

  // per-output-channel folded batch-norm record (Equ. 5-7 of the method)
  typedef struct packed {
    logic signed [B_W-1:0]    b;     // conv bias - running mean
    logic signed [WBN_W-1:0]  wbn;   // gamma / sqrt(var + eps)
    logic signed [BETA_W-1:0] beta;  // BN bias
  } bn_param_t;

  typedef struct packed {
    int unsigned cin;
    int unsigned cout;
    int unsigned groups;
    int unsigned lin;
    int unsigned lout;
    int unsigned stride;
    int unsigned pad;
    int unsigned row_base;
  } layer_cfg_t;

  function automatic layer_cfg_t layer_cfg(input int unsigned l);
    case (l)
      0:       return '{cin:5,  cout:64,  groups:1,  lin:2500, lout:1254, stride:2, pad:11, row_base:0};
      1:       return '{cin:64, cout:64,  groups:8,  lin:1254, lout:1269, stride:1, pad:15, row_base:4};
      2:       return '{cin:64, cout:64,  groups:8,  lin:1269, lout:1254, stride:1, pad:0,  row_base:8};
      default: return '{cin:64, cout:128, groups:16, lin:1254, lout:628,  stride:2, pad:8,  row_base:12};
    endcase
  endfunction

  // PE cycles a conv block needs: Cout * Lout / NPE (5016, 5076, 5016, 5024)
  function automatic int unsigned layer_pe_cycles(input int unsigned l);
    layer_cfg_t c;
    c = layer_cfg(l);
    return c.cout * c.lout / NPE;
  endfunction

  // ReLU, then saturate to the activation width
  function automatic data_t relu_sat(input logic signed [47:0] v);
    if (v <= 0) return '0;
    if (v > 48'(DATA_MAX)) return data_t'(DATA_MAX);
    return data_t'(v);
  endfunction

endpackage
