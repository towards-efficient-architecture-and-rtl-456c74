// fm_fuselink_buf: fuseLink buffer of one half.
//
// The other half writes into it the results of a fuseFilter job, one
// COLS-wide fp32 vector per pixel, at the job's output address. A job of
// this half that consumes the link reads one vector per pixel (read data one
// cycle after rd_en) and feeds it to the column multiplexers of the array,
// so the other modality's partial sums start this half's column sums. Each
// half has its own buffer, as in the paper; depth and word shape are this
// design's choice.
module fm_fuselink_buf
  import fp32_pkg::*;
#(
  parameter int unsigned COLS  = a3f_pkg::COLS_DEF,
  parameter int unsigned DEPTH = a3f_pkg::FL_DEPTH_DEF,
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
