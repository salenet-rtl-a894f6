// bn_param_bram: per-output-channel folded batch-norm records.
//
// Each record holds b = conv bias - running mean, w_BN = gamma /
// sqrt(var + eps) and beta, so the PE can evaluate
// (sum x*w + b) * w_BN + beta. Same row/bank layout as weight_bram: bank p,
// row row_base(l) + k is output channel 16k + p of conv block l; row LIN_ROW
// bank c holds the linear bias of class c in b (w_BN and beta unused).
// Host writes one record per cycle; a row read returns all banks one cycle
// after rd_row and holds it until the next read.
module bn_param_bram
  import salenet_pkg::*;
#(
  parameter int unsigned N_PE  = NPE,
  parameter int unsigned NROWS = ROWS,
  localparam int unsigned RW   = $clog2(NROWS),
  localparam int unsigned PW   = $clog2(N_PE)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [RW-1:0] wr_row,
  input  logic [PW-1:0] wr_pe,
  input  bn_param_t     wr_data,
  input  logic          rd_en,
  input  logic [RW-1:0] rd_row,
  output bn_param_t     rd_data [N_PE]
);
  // one bank per PE
  for (genvar p = 0; p < int'(N_PE); p++) begin : g_bank
    bn_param_t mem [NROWS];
    always_ff @(posedge clk) begin
      if (wr_en && wr_pe == PW'(p)) mem[wr_row] <= wr_data;
      if (rd_en) rd_data[p] <= mem[rd_row];
    end
  end
endmodule
