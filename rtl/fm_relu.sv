// fm_relu: rectified linear unit on a COLS-wide vector of fp32 values.
//
// With en high every negative value (sign bit set, including -0) becomes +0
// and every other value passes unchanged; with en low the vector passes
// unchanged, which lets a fuseFilter job send raw partial sums to the other
// half. Purely combinational. The paper names the ReLU stage after the Psum
// block; the bypass is this design's choice.
module fm_relu
  import fp32_pkg::*;
#(
  parameter int unsigned N = a3f_pkg::COLS_DEF
) (
  input  logic  en,
  input  fp32_t in_vec  [N],
  output fp32_t out_vec [N]
);

  always_comb begin
    for (int i = 0; i < int'(N); i++)
      out_vec[i] = (en && in_vec[i][31]) ? FP_ZERO : in_vec[i];
  end

endmodule
