// fm_weight_buf: weight buffer of one half.
//
// A word holds ROWS fp32 weights, one for each array row; loading a pass of
// weights into the array takes COLS consecutive words (word j of a pass ends
// in array column COLS-1-j). The host fills the buffer through the write
// port; rd_data shows the word addressed in the cycle rd_en was high, one
// cycle later. The paper names this buffer; its word shape is this design's.
module fm_weight_buf
  import fp32_pkg::*;
#(
  parameter int unsigned ROWS  = a3f_pkg::ROWS_DEF,
  parameter int unsigned DEPTH = a3f_pkg::WBUF_DEPTH_DEF,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          hw_en,
  input  logic [AW-1:0] hw_addr,
  input  fp32_t         hw_data [ROWS],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output fp32_t         rd_data [ROWS]
);

  fp32_t mem [DEPTH][ROWS];

  always_ff @(posedge clk) begin
    if (hw_en) mem[hw_addr] <= hw_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
