// input_buffer: the EEG window that conv block 1 reads, IN_CH = 5 channels by
// LEN = 2500 samples of DATA_W bits.
//
// A host writes one sample per cycle (wr_col, wr_ch, wr_data); the controller
// reads one whole column (all 5 channels of one time step) with one cycle of
// latency. The paper gives only the input shape; the storage and host port
// are this design's choice.
module input_buffer
  import salenet_pkg::*;
#(
  parameter int unsigned LEN = IN_LEN,
  parameter int unsigned CH  = IN_CH,
  localparam int unsigned AW = $clog2(LEN),
  localparam int unsigned CW = $clog2(CH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_col,
  input  logic [CW-1:0] wr_ch,
  input  data_t         wr_data,
  input  logic [AW-1:0] raddr,
  output data_t         rdata [CH]
);
  // one bank per channel so a column reads in one cycle
  for (genvar c = 0; c < int'(CH); c++) begin : g_bank
    data_t mem [LEN];
    always_ff @(posedge clk) begin
      if (wr_en && wr_ch == CW'(c)) mem[wr_col] <= wr_data;
      rdata[c] <= mem[raddr];
    end
  end
endmodule
