// pe_array: the array of NPE = 16 process engines.
//
// All PEs share the clock enable of the slow domain, the start strobe and the
// mode (conv block or linear layer). Each PE gets its own 128-element
// activation slice, its own 128 weights, its own folded BN record and its own
// bias-driven-pruning skip flag, so one PE cycle produces NPE output values:
// 16 output channels of one map position in a conv block, or the logits of
// the linear layer. valid is the AND of all PE valid flags (they run in
// lock step, so they rise together at the 8th slow-cycle edge after the start edge).
module pe_array
  import salenet_pkg::*;
#(
  parameter int unsigned N_PE  = NPE,
  parameter int unsigned VEC_N = VEC
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      ce,
  input  logic      start,
  input  logic      mode_linear,
  input  logic      skip  [N_PE],
  input  data_t     x     [N_PE][VEC_N],
  input  weight_t   w     [N_PE][VEC_N],
  input  bn_param_t param [N_PE],
  output acc_t      y     [N_PE],
  output logic      valid
);
  logic [N_PE-1:0] pe_valid;

  for (genvar p = 0; p < int'(N_PE); p++) begin : g_pe
    pe #(.VEC_N(VEC_N)) u_pe (
      .clk         (clk),
      .rst_n       (rst_n),
      .ce          (ce),
      .start       (start),
      .mode_linear (mode_linear),
      .skip        (skip[p]),
      .x           (x[p]),
      .w           (w[p]),
      .b           (param[p].b),
      .wbn         (param[p].wbn),
      .beta        (param[p].beta),
      .y           (y[p]),
      .valid       (pe_valid[p])
    );
  end

  assign valid = &pe_valid;
endmodule
