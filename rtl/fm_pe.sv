// fm_pe: processing element of the weight-stationary systolic array.
//
// Each PE performs one 32-bit floating-point multiply-accumulate per cycle,
// as the paper's PEs do (there, on five DSP blocks). It keeps one weight.
// Every cycle it passes its input value to the right-hand neighbour and
// passes psum_in + x_in * w down to the PE below; both outputs are
// registered, so a PE adds one cycle of latency in each direction.
// While w_shift is high the weight register loads w_in, and w_out shows the
// stored weight, so weights are shifted in from the left of a row. The
// weight-stationary dataflow and the single-cycle MAC are this design's
// choices; the paper gives only the MAC function and the PE grid.
module fm_pe
  import fp32_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  w_shift,
  input  fp32_t w_in,
  output fp32_t w_out,
  input  fp32_t x_in,
  output fp32_t x_out,
  input  fp32_t psum_in,
  output fp32_t psum_out
);

  fp32_t w_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q      <= FP_ZERO;
      x_out    <= FP_ZERO;
      psum_out <= FP_ZERO;
    end else begin
      if (w_shift) w_q <= w_in;
      x_out    <= x_in;
      psum_out <= fp_add(psum_in, fp_mul(x_in, w_q));
    end
  end

  assign w_out = w_q;

endmodule
