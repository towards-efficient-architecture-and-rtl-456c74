// fm_pool: max-pooling stage on the stream of COLS-wide output vectors.
//
// With en high the stage takes the channel-wise maximum of WIN consecutive
// valid vectors and emits it, registered, on the cycle after the last of the
// group arrives, with out_idx = in_idx / WIN (in_idx of the group's last
// vector). The host orders the pixels of a layer so that each pooling window
// (2x2 for WIN = 4) is WIN consecutive pixels; a layer's pixel count must be
// a multiple of WIN. With en low each vector passes through with one cycle of
// latency and its own index. clear restarts the window count. The paper
// names the Pool stage; maximum pooling, the window and the pixel order are
// this design's choice.
module fm_pool
  import fp32_pkg::*;
#(
  parameter int unsigned N     = a3f_pkg::COLS_DEF,
  parameter int unsigned WIN   = a3f_pkg::POOL_WIN,
  parameter int unsigned IDX_W = a3f_pkg::ADDR_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic             clear,
  input  logic             in_valid,
  input  logic [IDX_W-1:0] in_idx,
  input  fp32_t            in_vec  [N],
  output logic             out_valid,
  output logic [IDX_W-1:0] out_idx,
  output fp32_t            out_vec [N]
);

  localparam int unsigned CW = (WIN > 1) ? $clog2(WIN) : 1;

  logic [CW-1:0] cnt;
  fp32_t         acc [N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      acc       <= '{default: FP_ZERO};
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_vec   <= '{default: FP_ZERO};
    end else begin
      out_valid <= 1'b0;
      if (clear) begin
        cnt <= '0;
      end else if (in_valid) begin
        if (!en) begin
          out_valid <= 1'b1;
          out_idx   <= in_idx;
          out_vec   <= in_vec;
        end else begin
          for (int i = 0; i < int'(N); i++) begin
            if (cnt == '0) acc[i] <= in_vec[i];
            else           acc[i] <= fp_max(acc[i], in_vec[i]);
          end
          if (cnt == CW'(WIN - 1)) begin
            cnt       <= '0;
            out_valid <= 1'b1;
            out_idx   <= IDX_W'(in_idx / WIN);
            for (int i = 0; i < int'(N); i++)
              out_vec[i] <= (cnt == '0) ? in_vec[i] : fp_max(acc[i], in_vec[i]);
          end else begin
            cnt <= cnt + CW'(1);
          end
        end
      end
    end
  end

endmodule
