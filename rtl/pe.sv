// pe: one SaleNet process engine.
//
// Computes  y = (sum_{i<VEC} x[i]*w[i] + b) * w_BN + beta  followed by ReLU
// for a convolutional block, or  y = sum x[i]*w[i] + b  for the linear layer
// (w_BN = 1, beta = 0, no ReLU). This single equation covers a 1-d group
// convolution output (one channel, one position), its batch norm and its
// ReLU.
//
// Structure (as the PE of the published architecture): VEC = 128 multipliers,
// VEC/2 = 64 adders and VEC = 128 registers, with a small step counter as the
// PE controller. The adders are used as a folded tree: cycle 1 writes the 128
// products into the registers; in each of the next log2(VEC) = 7 cycles the
// 64 adders add register pairs and a mux in front of registers 0..63 writes
// the sums back; the last cycle adds b, applies w_BN (fixed point, OUT_SHIFT
// fraction bits) and beta, and ReLU-saturates to DATA_W bits. The folding and
// the fixed-point format are this design's choices; the paper gives only the
// unit counts and the equation.
//
// Bias-driven pruning: with skip = 1 the channel is treated as pruned. The
// registers do not toggle and y is 0 (what ReLU gives for the negative output
// the pruning predicts).
//
// Timing: the PE lives in the slow (10 MHz) domain, modelled as a clock
// enable ce on the fast clock. start is sampled on a ce cycle; x, w, b, wbn,
// beta, mode_linear and skip must then be valid and the operands x/w are no
// longer needed afterwards. A PE cycle takes 1 + log2(VEC) + 1 = 9 slow
// cycles: the start cycle loads the products, and valid drops at that edge and
// rises at the 8th ce edge after it, holding y until the next start.
module pe
  import salenet_pkg::*;
#(
  parameter int unsigned VEC_N = VEC
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     ce,
  input  logic                     start,
  input  logic                     mode_linear,
  input  logic                     skip,
  input  data_t                    x [VEC_N],
  input  weight_t                  w [VEC_N],
  input  logic signed [B_W-1:0]    b,
  input  logic signed [WBN_W-1:0]  wbn,
  input  logic signed [BETA_W-1:0] beta,
  output acc_t                     y,
  output logic                     valid
);
  localparam int unsigned STEPS = $clog2(VEC_N);  // reduction cycles

  acc_t                  r [VEC_N];        // the 128 registers
  logic [3:0]            step;             // PE controller
  logic                  busy;
  logic                  skip_q, lin_q;
  logic signed [B_W-1:0]    b_q;
  logic signed [WBN_W-1:0]  wbn_q;
  logic signed [BETA_W-1:0] beta_q;

  // post-processing of register 0
  acc_t                  sum_b;
  logic signed [47:0]    bn_full;
  acc_t                  y_next;
  always_comb begin
    sum_b   = r[0] + acc_t'(b_q);
    bn_full = ((48'(sum_b) * 48'(wbn_q)) >>> OUT_SHIFT) + 48'(beta_q);
    if (skip_q)     y_next = '0;
    else if (lin_q) y_next = sum_b;
    else            y_next = acc_t'(relu_sat(bn_full));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      step   <= '0;
      busy   <= 1'b0;
      valid  <= 1'b0;
      y      <= '0;
      skip_q <= 1'b0;
      lin_q  <= 1'b0;
      b_q    <= '0;
      wbn_q  <= '0;
      beta_q <= '0;
    end else if (ce) begin
      if (!busy) begin
        if (start) begin
          busy   <= 1'b1;
          valid  <= 1'b0;
          step   <= 4'd1;
          skip_q <= skip;
          lin_q  <= mode_linear;
          b_q    <= b;
          wbn_q  <= wbn;
          beta_q <= beta;
        end
      end else if (step <= 4'(STEPS)) begin
        step <= step + 4'd1;
      end else begin
        busy  <= 1'b0;
        valid <= 1'b1;
        step  <= '0;
        y     <= y_next;
      end
    end
  end

  // multiplier / adder datapath: product load or pairwise reduction
  always_ff @(posedge clk) begin
    if (ce) begin
      if (!busy && start && !skip) begin
        for (int i = 0; i < int'(VEC_N); i++)
          r[i] <= acc_t'(x[i]) * acc_t'(w[i]);
      end else if (busy && !skip_q && step >= 4'd1 && step <= 4'(STEPS)) begin
        for (int i = 0; i < int'(VEC_N) / 2; i++)
          r[i] <= r[2*i] + r[2*i+1];
      end
    end
  end

  // start must not arrive while the PE is busy
  a_no_start_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                    (ce && busy) |-> !start);
endmodule
