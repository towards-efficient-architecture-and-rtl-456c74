// fm_psum_buf: partial-sum buffer of one half.
//
// Holds one COLS-wide vector of fp32 partial sums per pixel. When a job needs
// more than one pass (more than ROWS input channels), the array's results of
// every pass but the last are written here at the pixel index, and read
// back as the column-top values of the same pixel in the next pass, so the
// sums accumulate across passes. Read data appears one cycle after rd_en.
// The paper names the Psum block between the array and the ReLU; keeping
// the partial sums of earlier passes in it is this design's choice.
module fm_psum_buf
  import fp32_pkg::*;
#(
  parameter int unsigned COLS  = a3f_pkg::COLS_DEF,
  parameter int unsigned DEPTH = a3f_pkg::PSUM_DEPTH_DEF,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  fp32_t         wr_data [COLS],
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output fp32_t         rd_data [COLS]
);

  fp32_t mem [DEPTH][COLS];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
