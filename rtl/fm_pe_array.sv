// fm_pe_array: one half of the split PE array, ROWS x COLS fm_pe in a
// weight-stationary systolic arrangement, with one fuseLink multiplexer per
// column.
//
// Input values enter at the left of each row and move right; partial sums
// enter at the top of each column, move down and leave at the bottom, as in
// the paper's array drawing. For every valid input vector x_vec (one value
// per row) the array returns, LAT = ROWS+COLS-1 cycles later, one vector of
// COLS results:
//     out_vec[c] = top[c] + sum_r x_vec[r] * W[r][c]   (fp32, summed r = 0 first)
// where top[c] = fuse_sel ? top_fuse[c] : top_local[c]. The column
// multiplexer thus starts a column either from the local path (zero or the
// partial sum of the previous pass) or from the fuseLink buffer, which is how
// a kept fuseLink's partial sums are merged into this half's results.
// The array skews the inputs itself (row r delayed r cycles, column c's top
// value delayed c cycles) and deskews the outputs, so the caller sees a plain
// pipeline; in_tag travels along with each vector and returns as out_tag.
// Weights: while w_shift is high each row shifts w_row_in[r] in from the
// left; after COLS shifts the value given first sits in column COLS-1.
// Weights must only be shifted while no vector is in flight.
// The multiplexer selects before the column skew, which gives the same
// result as selecting at the column top with fewer flip-flops.
module fm_pe_array
  import fp32_pkg::*;
#(
  parameter int unsigned ROWS  = a3f_pkg::ROWS_DEF,
  parameter int unsigned COLS  = a3f_pkg::COLS_DEF,
  parameter int unsigned TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             w_shift,
  input  fp32_t            w_row_in  [ROWS],
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  fp32_t            x_vec     [ROWS],
  input  fp32_t            top_local [COLS],
  input  fp32_t            top_fuse  [COLS],
  input  logic             fuse_sel,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output fp32_t            out_vec   [COLS]
);

  localparam int unsigned LAT = ROWS + COLS - 1;

  fp32_t x_h [ROWS][COLS+1]; // horizontal links, x_h[r][0] = skewed row input
  fp32_t w_h [ROWS][COLS+1]; // weight shift chain
  fp32_t p_v [ROWS+1][COLS]; // vertical links, p_v[0][c] = skewed column top

  // ---- row input skew: row r delayed r cycles
  for (genvar r = 0; r < ROWS; r++) begin : g_rskew
    if (r == 0) begin : g_nodly
      assign x_h[0][0] = x_vec[0];
    end else begin : g_dly
      fp32_t sr [r];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) sr <= '{default: FP_ZERO};
        else begin
          sr[0] <= x_vec[r];
          for (int k = 1; k < r; k++) sr[k] <= sr[k-1];
        end
      end
      assign x_h[r][0] = sr[r-1];
    end
    assign w_h[r][0] = w_row_in[r];
  end

  // ---- column top multiplexer and skew: column c delayed c cycles
  for (genvar c = 0; c < COLS; c++) begin : g_cskew
    fp32_t top_sel;
    assign top_sel = fuse_sel ? top_fuse[c] : top_local[c];
    if (c == 0) begin : g_nodly
      assign p_v[0][0] = top_sel;
    end else begin : g_dly
      fp32_t sr [c];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) sr <= '{default: FP_ZERO};
        else begin
          sr[0] <= top_sel;
          for (int k = 1; k < c; k++) sr[k] <= sr[k-1];
        end
      end
      assign p_v[0][c] = sr[c-1];
    end
  end

  // ---- the PE grid
  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      fm_pe u_pe (
        .clk      (clk),
        .rst_n    (rst_n),
        .w_shift  (w_shift),
        .w_in     (w_h[r][c]),
        .w_out    (w_h[r][c+1]),
        .x_in     (x_h[r][c]),
        .x_out    (x_h[r][c+1]),
        .psum_in  (p_v[r][c]),
        .psum_out (p_v[r+1][c])
      );
    end
  end

  // ---- output deskew: column c delayed COLS-1-c cycles
  for (genvar c = 0; c < COLS; c++) begin : g_oskew
    if (c == COLS - 1) begin : g_nodly
      assign out_vec[c] = p_v[ROWS][c];
    end else begin : g_dly
      localparam int unsigned D = COLS - 1 - c;
      fp32_t sr [D];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) sr <= '{default: FP_ZERO};
        else begin
          sr[0] <= p_v[ROWS][c];
          for (int k = 1; k < int'(D); k++) sr[k] <= sr[k-1];
        end
      end
      assign out_vec[c] = sr[D-1];
    end
  end

  // ---- valid and tag pipeline
  logic             v_sr [LAT];
  logic [TAG_W-1:0] t_sr [LAT];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_sr <= '{default: 1'b0};
      t_sr <= '{default: '0};
    end else begin
      v_sr[0] <= in_valid;
      t_sr[0] <= in_tag;
      for (int k = 1; k < int'(LAT); k++) begin
        v_sr[k] <= v_sr[k-1];
        t_sr[k] <= t_sr[k-1];
      end
    end
  end
  assign out_valid = v_sr[LAT-1];
  assign out_tag   = t_sr[LAT-1];

endmodule
