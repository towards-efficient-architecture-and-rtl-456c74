// fm_ifmap_buf: input (feature-map) buffer of one half.
//
// A word holds ROWS fp32 values, the input vector of one pixel for one pass
// (ROWS input channels). The host fills it from off-chip memory through the
// host write port. The array reads it through the read port: rd_data shows
// the word addressed in the cycle rd_en was high, one cycle later. Finished
// layer outputs come back through the write-back port: an output pixel has
// COLS channels, so it is written as NWB = ceil(COLS/ROWS) words in one cycle
// at independent addresses (the channel groups of the next layer's input).
// When a write-back address equals the host address, the write-back wins.
// The paper names this buffer; its word shape and ports are this design's.
module fm_ifmap_buf
  import fp32_pkg::*;
#(
  parameter int unsigned ROWS  = a3f_pkg::ROWS_DEF,
  parameter int unsigned COLS  = a3f_pkg::COLS_DEF,
  parameter int unsigned DEPTH = a3f_pkg::IBUF_DEPTH_DEF,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned NWB  = (COLS + ROWS - 1) / ROWS
) (
  input  logic          clk,
  input  logic          hw_en,
  input  logic [AW-1:0] hw_addr,
  input  fp32_t         hw_data [ROWS],
  input  logic          wb_en   [NWB],
  input  logic [AW-1:0] wb_addr [NWB],
  input  fp32_t         wb_data [NWB][ROWS],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output fp32_t         rd_data [ROWS]
);

  fp32_t mem [DEPTH][ROWS];

  always_ff @(posedge clk) begin
    if (hw_en) mem[hw_addr] <= hw_data;
    for (int k = 0; k < int'(NWB); k++)
      if (wb_en[k]) mem[wb_addr[k]] <= wb_data[k];
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
