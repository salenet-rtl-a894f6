// salenet_top: the SaleNet accelerator.
//
// End-to-end CNN inference for sustained-attention evaluation from a
// 5-channel, 2500-sample prefrontal EEG window: four conv blocks (1-d group
// convolution, kernel 16, folded batch norm, ReLU) with map shapes
// (5,2500) -> (64,1254) -> (64,1269) -> (64,1254) -> (128,628), global
// average pooling to 128 values and a 128 -> 2 linear layer whose larger
// output gives the attention level.
//
// Blocks: input_buffer (EEG window), weight_bram and bn_param_bram (the
// network parameters), feature_bram (one buffer re-used in place by the
// outputs of conv blocks 1-3), data_loader (sliding window and group slice
// selection), pe_array (16 PEs of 128 multipliers), gap, and control_logic.
// The parameters and the EEG window are written through the host ports
// below while the accelerator is idle (the paper does not describe how they
// arrive; these ports are this design's choice).
//
// Timing: one 50 MHz clock; the PE array advances on ce, one cycle in five
// (the paper's 10 MHz PE domain). start pulses begin an inference; done
// pulses at its end, after which logits and level hold until the next
// start. pe_cycles[l] counts PE cycles per layer (conv 1-4, linear) and
// pruned the channel evaluations skipped by bias-driven pruning.
module salenet_top
  import salenet_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  // EEG window
  input  logic                     eeg_we,
  input  logic [11:0]              eeg_col,
  input  logic [2:0]               eeg_ch,
  input  data_t                    eeg_data,
  // weights: row, PE bank, element
  input  logic                     w_we,
  input  logic [ROW_W-1:0]         w_row,
  input  logic [3:0]               w_pe,
  input  logic [6:0]               w_idx,
  input  weight_t                  w_data,
  // folded BN records: row, PE bank
  input  logic                     p_we,
  input  logic [ROW_W-1:0]         p_row,
  input  logic [3:0]               p_pe,
  input  bn_param_t                p_data,
  // bias-driven pruning thresholds of conv blocks 1-3 (beta format)
  input  logic                     bdp_en,
  input  logic signed [BETA_W-1:0] bdp_thr [3],
  // control and results
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  output acc_t                     logits [N_CLASS],
  output logic                     level,
  output logic [31:0]              pe_cycles [NLAYER+1],
  output logic [31:0]              pruned
);
  logic       ce, pe_start, mode_linear, pe_valid;
  logic       skip [NPE];
  acc_t       pe_y [NPE];
  logic       rd_en;
  logic [ROW_W-1:0] rd_row;
  bn_param_t  param [NPE];
  weight_t    wgt [NPE][VEC];
  logic [11:0] in_raddr;
  data_t      in_rdata [IN_CH];
  logic [10:0] fm_raddr, fm_waddr;
  data_t      fm_rdata [CH_MAX];
  data_t      fm_wdata [CH_MAX];
  logic       fm_we;
  logic       win_clear, win_shift;
  data_t      win_col [CH_MAX];
  logic [1:0] layer;
  logic [2:0] chunk;
  logic       gap_clear, gap_acc;
  data_t      gap_avg [GAP_CH];
  data_t      x [NPE][VEC];

  input_buffer u_input (
    .clk, .wr_en(eeg_we), .wr_col(eeg_col), .wr_ch(eeg_ch), .wr_data(eeg_data),
    .raddr(in_raddr), .rdata(in_rdata)
  );

  weight_bram u_weights (
    .clk, .wr_en(w_we), .wr_row(w_row), .wr_pe(w_pe), .wr_idx(w_idx),
    .wr_data(w_data), .rd_en, .rd_row, .rd_data(wgt)
  );

  bn_param_bram u_params (
    .clk, .wr_en(p_we), .wr_row(p_row), .wr_pe(p_pe), .wr_data(p_data),
    .rd_en, .rd_row, .rd_data(param)
  );

  feature_bram u_fmap (
    .clk, .raddr(fm_raddr), .rdata(fm_rdata),
    .we(fm_we), .waddr(fm_waddr), .wdata(fm_wdata)
  );

  data_loader u_loader (
    .clk, .rst_n, .clear(win_clear), .shift(win_shift), .col_in(win_col),
    .layer, .chunk, .mode_linear, .gap_avg, .x
  );

  pe_array u_pes (
    .clk, .rst_n, .ce, .start(pe_start), .mode_linear, .skip,
    .x, .w(wgt), .param, .y(pe_y), .valid(pe_valid)
  );

  gap u_gap (
    .clk, .rst_n, .clear(gap_clear), .acc(gap_acc), .chunk, .y(pe_y),
    .avg(gap_avg)
  );

  control_logic u_ctrl (
    .clk, .rst_n, .start, .busy, .done, .bdp_en, .bdp_thr,
    .ce, .pe_start, .mode_linear, .skip, .pe_valid, .pe_y,
    .rd_en, .rd_row, .param,
    .in_raddr, .in_rdata, .fm_raddr, .fm_rdata, .fm_we, .fm_waddr, .fm_wdata,
    .win_clear, .win_shift, .win_col, .layer, .chunk,
    .gap_clear, .gap_acc, .logits, .level, .pe_cycles, .pruned
  );
endmodule
