// control_logic: sequencer of one SaleNet inference.
//
// Runs conv blocks 1..4 and then the linear layer on the PE array. For every
// output position t of a conv block it
//   1. loads input columns into the data_loader window (16 at the start of a
//      block, `stride` per later position; out-of-range columns are zero
//      padding), two fast cycles per column: address, then shift;
//   2. for each 16-channel chunk k (Cout/16 of them): reads weight and BN
//      rows row_base + k, waits for a slow-domain enable, starts the PE array
//      (one PE cycle) and waits for its result;
//   3. stores the 16 results: into a 64-channel output column for blocks
//      1-3, into the GAP sums for block 4;
//   4. for blocks 1-3 writes the finished column to feature_bram address t,
//      in place over the block's own input map.
// A block therefore takes Cout/16 * Lout PE cycles: 5016, 5076, 5016 and
// 5024, the counts the paper gives, and the linear layer one PE cycle. The
// per-layer counts are exported in pe_cycles[0..4].
//
// Bias-driven pruning: in blocks 1-3, an output channel whose BN bias beta
// is below that block's threshold bdp_thr[l] is not executed (the PE's skip
// input), and its output is 0. bdp_en = 0 turns this off. Thresholds are
// quantized in the beta format; the paper's values are -0.061, -0.046 and
// -0.183 before quantization.
//
// Clocking: the paper loads data at 50 MHz and runs the PEs at 10 MHz. Here
// everything runs on the 50 MHz clock and ce, high one cycle in SLOW_DIV = 5,
// is the clock enable of the 10 MHz PE domain (this design's choice in place
// of a second clock).
//
// Interface: start (pulse) begins an inference; busy is high until done
// pulses, with logits/level valid from then until the next start. level = 1
// when logit 1 exceeds logit 0 (the class read as high attention).
module control_logic
  import salenet_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  output logic                     busy,
  output logic                     done,
  // bias-driven pruning
  input  logic                     bdp_en,
  input  logic signed [BETA_W-1:0] bdp_thr [3],
  // slow domain enable and PE array
  output logic                     ce,
  output logic                     pe_start,
  output logic                     mode_linear,
  output logic                     skip [NPE],
  input  logic                     pe_valid,
  input  acc_t                     pe_y [NPE],
  // weight / BN parameter rows
  output logic                     rd_en,
  output logic [ROW_W-1:0]         rd_row,
  input  bn_param_t                param [NPE],
  // input buffer and feature buffer
  output logic [11:0]              in_raddr,
  input  data_t                    in_rdata [IN_CH],
  output logic [10:0]              fm_raddr,
  input  data_t                    fm_rdata [CH_MAX],
  output logic                     fm_we,
  output logic [10:0]              fm_waddr,
  output data_t                    fm_wdata [CH_MAX],
  // data loader
  output logic                     win_clear,
  output logic                     win_shift,
  output data_t                    win_col [CH_MAX],
  output logic [1:0]               layer,
  output logic [2:0]               chunk,
  // GAP
  output logic                     gap_clear,
  output logic                     gap_acc,
  // results and status
  output acc_t                     logits [N_CLASS],
  output logic                     level,
  output logic [31:0]              pe_cycles [NLAYER+1],
  output logic [31:0]              pruned
);
  typedef enum logic [3:0] {
    S_IDLE, S_LINIT, S_LD_RD, S_LD_CAP, S_W_RD, S_W_WAIT,
    S_PE_GO, S_PE_WAIT, S_STORE, S_COL_END, S_LIN, S_DONE
  } state_t;

  state_t             state;
  logic [2:0]         div;
  logic signed [12:0] next_col;   // next input column to load (may be < 0)
  logic [4:0]         loads_left;
  logic               col_ok;     // column being read is inside the map
  logic [10:0]        t;          // output position
  data_t              out_col [CH_MAX];
  layer_cfg_t         cfg;

  assign cfg         = layer_cfg(32'(layer));
  assign ce          = (div == 3'(SLOW_DIV - 1));
  assign busy        = (state != S_IDLE);
  assign rd_en       = (state == S_W_RD);
  assign rd_row      = mode_linear ? ROW_W'(LIN_ROW) : ROW_W'(cfg.row_base + 32'(chunk));
  assign pe_start    = (state == S_PE_GO) && ce;
  assign win_clear   = (state == S_LINIT);
  assign win_shift   = (state == S_LD_CAP);
  assign in_raddr    = 12'(next_col);
  assign fm_raddr    = 11'(next_col);
  assign fm_we       = (state == S_COL_END) && (layer != 2'd3);
  assign fm_waddr    = t;
  assign fm_wdata    = out_col;
  assign gap_clear   = (state == S_IDLE) && start;
  assign gap_acc     = (state == S_STORE) && (layer == 2'd3) && !mode_linear;
  assign level       = (logits[1] > logits[0]);

  always_comb begin
    for (int c = 0; c < CH_MAX; c++) begin
      if (!col_ok)          win_col[c] = '0;
      else if (layer != 0)  win_col[c] = fm_rdata[c];
      else if (c < IN_CH)   win_col[c] = in_rdata[c];
      else                  win_col[c] = '0;
    end
  end

  always_comb
    for (int p = 0; p < NPE; p++)
      skip[p] = bdp_en && !mode_linear && (layer != 2'd3) &&
                (param[p].beta < bdp_thr[layer]);

  logic [$clog2(NPE):0] n_skip;   // PEs skipped in this PE cycle
  always_comb begin
    n_skip = '0;
    for (int p = 0; p < NPE; p++) n_skip = n_skip + ($clog2(NPE)+1)'(skip[p]);
  end

  // slow-domain enable
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n)          div <= '0;
    else if (ce)         div <= '0;
    else                 div <= div + 3'd1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      done        <= 1'b0;
      layer       <= '0;
      chunk       <= '0;
      mode_linear <= 1'b0;
      next_col    <= '0;
      loads_left  <= '0;
      col_ok      <= 1'b0;
      t           <= '0;
      pruned      <= '0;
      for (int c = 0; c < CH_MAX; c++) out_col[c] <= '0;
      for (int l = 0; l <= NLAYER; l++) pe_cycles[l] <= '0;
      for (int c = 0; c < N_CLASS; c++) logits[c] <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          layer       <= '0;
          mode_linear <= 1'b0;
          pruned      <= '0;
          for (int l = 0; l <= NLAYER; l++) pe_cycles[l] <= '0;
          state       <= S_LINIT;
        end
        S_LINIT: begin
          next_col   <= -13'(cfg.pad);
          loads_left <= 5'(KSIZE);
          t          <= '0;
          chunk      <= '0;
          state      <= S_LD_RD;
        end
        S_LD_RD: begin
          col_ok <= (next_col >= 0) && (32'(next_col) < cfg.lin);
          state  <= S_LD_CAP;
        end
        S_LD_CAP: begin
          next_col   <= next_col + 13'sd1;
          loads_left <= loads_left - 5'd1;
          state      <= (loads_left == 5'd1) ? S_W_RD : S_LD_RD;
        end
        S_W_RD:   state <= S_W_WAIT;
        S_W_WAIT: state <= S_PE_GO;
        S_PE_GO: if (ce) begin
          pe_cycles[mode_linear ? NLAYER : 32'(layer)] <=
            pe_cycles[mode_linear ? NLAYER : 32'(layer)] + 32'd1;
          pruned <= pruned + 32'(n_skip);
          state <= S_PE_WAIT;
        end
        S_PE_WAIT: if (pe_valid) state <= S_STORE;
        S_STORE: begin
          if (mode_linear) begin
            for (int c = 0; c < N_CLASS; c++) logits[c] <= pe_y[c];
            state <= S_DONE;
          end else begin
            if (layer != 2'd3)
              for (int p = 0; p < NPE; p++)
                out_col[{chunk[1:0], 4'(p)}] <= data_t'(pe_y[p]);
            if (32'(chunk) == cfg.cout / NPE - 1) begin
              state <= S_COL_END;
            end else begin
              chunk <= chunk + 3'd1;
              state <= S_W_RD;
            end
          end
        end
        S_COL_END: begin
          chunk <= '0;
          t     <= t + 11'd1;
          if (32'(t) == cfg.lout - 1) begin
            if (layer == 2'd3) begin
              state <= S_LIN;
            end else begin
              layer <= layer + 2'd1;
              state <= S_LINIT;
            end
          end else begin
            loads_left <= 5'(cfg.stride);
            state      <= S_LD_RD;
          end
        end
        S_LIN: begin
          mode_linear <= 1'b1;
          chunk       <= '0;
          state       <= S_W_RD;
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_fm_write_in_range: assert property (@(posedge clk) disable iff (!rst_n)
                                        fm_we |-> (32'(fm_waddr) < FM_DEPTH));
  a_start_on_ce: assert property (@(posedge clk) disable iff (!rst_n)
                                  pe_start |-> ce);
endmodule
