// fm_half: one processing half of the accelerator, running one modality's
// network (RGB or depth) on its own buffers, PE array and controller.
//
// Data path, one pixel per cycle while streaming:
//   input buffer --x--> PE array (ROWS x COLS) --> Psum --> ReLU --> Pool
//   weight buffer -w-^        ^ column tops          |               |
//   psum buffer (earlier passes) / fuseLink buffer --+               v
//                                  output: own input buffer or the other
//                                  half's fuseLink buffer
// The controller issues buffer reads in cycle t; the read data and the
// issue flags, registered, reach the array in cycle t+1; results leave the
// array ROWS+COLS-1 cycles later. Results of a pass that is not the last go
// to the psum buffer (at the pixel index) and start the same pixel's columns
// in the next pass; results of the last pass go through ReLU and Pool.
// A job with role ROLE_PRODUCE sends the pooled output vector o to the other
// half (fo_*) at address out_base + o. Any other job writes it back into
// this half's input buffer as NWB = ceil(COLS/ROWS) words, word k at
//   out_base + k*n_out + o,   n_out = n_pix / POOL_WIN if pooling, else n_pix,
// which is exactly the layout a following job reads as its input (pass k =
// channels k*ROWS .. k*ROWS+ROWS-1). The other half writes this half's
// fuseLink buffer through fi_*.
// Host ports: hw_* fills the input buffer, wt_* the weight buffer, jt_* the
// job table; hr_* reads the input buffer (read data one cycle later) while
// the half is idle. The split into two halves, the fuseLink buffer per half
// and the stage order follow the paper; the addressing is this design's.
module fm_half
  import fp32_pkg::*;
  import a3f_pkg::*;
#(
  parameter int unsigned ROWS       = a3f_pkg::ROWS_DEF,
  parameter int unsigned COLS       = a3f_pkg::COLS_DEF,
  parameter int unsigned IBUF_DEPTH = a3f_pkg::IBUF_DEPTH_DEF,
  parameter int unsigned WBUF_DEPTH = a3f_pkg::WBUF_DEPTH_DEF,
  parameter int unsigned PSUM_DEPTH = a3f_pkg::PSUM_DEPTH_DEF,
  parameter int unsigned FL_DEPTH   = a3f_pkg::FL_DEPTH_DEF,
  parameter int unsigned NJOBS      = a3f_pkg::NJOBS_DEF,
  parameter int unsigned NLINKS     = a3f_pkg::NLINKS_DEF,
  localparam int unsigned IAW = $clog2(IBUF_DEPTH),
  localparam int unsigned WAW = $clog2(WBUF_DEPTH),
  localparam int unsigned PAW = $clog2(PSUM_DEPTH),
  localparam int unsigned FAW = $clog2(FL_DEPTH),
  localparam int unsigned JW  = $clog2(NJOBS + 1),
  localparam int unsigned NWB = (COLS + ROWS - 1) / ROWS
) (
  input  logic              clk,
  input  logic              rst_n,
  // host access
  input  logic              hw_en,
  input  logic [IAW-1:0]    hw_addr,
  input  fp32_t             hw_data [ROWS],
  input  logic              hr_en,
  input  logic [IAW-1:0]    hr_addr,
  output fp32_t             hr_data [ROWS],
  input  logic              wt_en,
  input  logic [WAW-1:0]    wt_addr,
  input  fp32_t             wt_data [ROWS],
  input  logic              jt_we,
  input  logic [JW-1:0]     jt_addr,
  input  job_t              jt_data,
  input  logic [JW-1:0]     n_jobs,
  // run control and fuseLink status from the system controller
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic [NLINKS-1:0] keep,
  input  logic [NLINKS-1:0] ready,
  output logic              link_done,
  output logic [LINK_W-1:0] link_id,
  // fuseLink results to the other half / from the other half
  output logic              fo_valid,
  output logic [FAW-1:0]    fo_addr,
  output fp32_t             fo_data [COLS],
  input  logic              fi_valid,
  input  logic [FAW-1:0]    fi_addr,
  input  fp32_t             fi_data [COLS],
  // activity counters
  output logic [15:0]       cnt_jobs_run,
  output logic [15:0]       cnt_jobs_skipped,
  output logic [15:0]       cnt_fused,
  output logic [31:0]       cnt_wait_cycles,
  output logic [31:0]       cnt_cycles
);

  localparam int unsigned TAG_W = 1 + ADDR_W;

  // ---------------- controller
  job_t              cur;
  logic              pool_clear, w_rd_en, issue_valid, issue_first, issue_last, issue_fuse;
  logic [ADDR_W-1:0] w_rd_addr, issue_pix, x_rd_addr, fl_rd_addr;

  fm_half_ctrl #(.ROWS(ROWS), .COLS(COLS), .NJOBS(NJOBS), .NLINKS(NLINKS)) u_ctrl (
    .clk, .rst_n, .jt_we, .jt_addr, .jt_data, .n_jobs, .start, .busy, .done,
    .keep, .ready, .link_done, .link_id, .cur, .pool_clear, .w_rd_en, .w_rd_addr,
    .issue_valid, .issue_pix, .x_rd_addr, .fl_rd_addr, .issue_first, .issue_last,
    .issue_fuse, .cnt_jobs_run, .cnt_jobs_skipped, .cnt_fused, .cnt_wait_cycles,
    .cnt_cycles
  );

  // ---------------- buffers
  fp32_t x_rd [ROWS];
  fp32_t w_rd [ROWS];
  fp32_t ps_rd [COLS];
  fp32_t fl_rd [COLS];
  logic  wb_en   [NWB];
  logic [IAW-1:0] wb_addr [NWB];
  fp32_t wb_data [NWB][ROWS];
  logic  ps_wr_en;
  logic [PAW-1:0] ps_wr_addr;
  fp32_t arr_out [COLS];

  fm_ifmap_buf #(.ROWS(ROWS), .COLS(COLS), .DEPTH(IBUF_DEPTH)) u_ibuf (
    .clk,
    .hw_en, .hw_addr, .hw_data,
    .wb_en, .wb_addr, .wb_data,
    .rd_en   (busy ? issue_valid : hr_en),
    .rd_addr (busy ? IAW'(x_rd_addr) : hr_addr),
    .rd_data (x_rd)
  );
  assign hr_data = x_rd;

  fm_weight_buf #(.ROWS(ROWS), .DEPTH(WBUF_DEPTH)) u_wbuf (
    .clk, .hw_en(wt_en), .hw_addr(wt_addr), .hw_data(wt_data),
    .rd_en(w_rd_en), .rd_addr(WAW'(w_rd_addr)), .rd_data(w_rd)
  );

  fm_psum_buf #(.COLS(COLS), .DEPTH(PSUM_DEPTH)) u_psum (
    .clk, .wr_en(ps_wr_en), .wr_addr(ps_wr_addr), .wr_data(arr_out),
    .rd_en(issue_valid), .rd_addr(PAW'(issue_pix)), .rd_data(ps_rd)
  );

  fm_fuselink_buf #(.COLS(COLS), .DEPTH(FL_DEPTH)) u_flbuf (
    .clk, .wr_en(fi_valid), .wr_addr(fi_addr), .wr_data(fi_data),
    .rd_en(issue_valid), .rd_addr(FAW'(fl_rd_addr)), .rd_data(fl_rd)
  );

  // ---------------- issue stage register (aligns flags with read data)
  logic              s1_valid, s1_first, s1_last, s1_fuse, s1_wshift;
  logic [ADDR_W-1:0] s1_pix;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid  <= 1'b0;
      s1_first  <= 1'b0;
      s1_last   <= 1'b0;
      s1_fuse   <= 1'b0;
      s1_wshift <= 1'b0;
      s1_pix    <= '0;
    end else begin
      s1_valid  <= issue_valid;
      s1_first  <= issue_first;
      s1_last   <= issue_last;
      s1_fuse   <= issue_fuse;
      s1_wshift <= w_rd_en;
      s1_pix    <= issue_pix;
    end
  end

  fp32_t top_local [COLS];
  always_comb begin
    for (int c = 0; c < int'(COLS); c++) top_local[c] = s1_first ? FP_ZERO : ps_rd[c];
  end

  // ---------------- PE array
  logic             arr_valid;
  logic [TAG_W-1:0] arr_tag;

  fm_pe_array #(.ROWS(ROWS), .COLS(COLS), .TAG_W(TAG_W)) u_array (
    .clk, .rst_n,
    .w_shift   (s1_wshift),
    .w_row_in  (w_rd),
    .in_valid  (s1_valid),
    .in_tag    ({s1_last, s1_pix}),
    .x_vec     (x_rd),
    .top_local (top_local),
    .top_fuse  (fl_rd),
    .fuse_sel  (s1_fuse),
    .out_valid (arr_valid),
    .out_tag   (arr_tag),
    .out_vec   (arr_out)
  );

  logic              arr_last;
  logic [ADDR_W-1:0] arr_pix;
  assign arr_last   = arr_tag[TAG_W-1];
  assign arr_pix    = arr_tag[ADDR_W-1:0];
  assign ps_wr_en   = arr_valid && !arr_last;
  assign ps_wr_addr = PAW'(arr_pix);

  // ---------------- ReLU and Pool
  fp32_t             act [COLS];
  logic              pl_valid;
  logic [ADDR_W-1:0] pl_idx;
  fp32_t             pl_vec [COLS];

  fm_relu #(.N(COLS)) u_relu (.en(cur.relu_en), .in_vec(arr_out), .out_vec(act));

  fm_pool #(.N(COLS), .WIN(POOL_WIN), .IDX_W(ADDR_W)) u_pool (
    .clk, .rst_n, .en(cur.pool_en), .clear(pool_clear),
    .in_valid(arr_valid && arr_last), .in_idx(arr_pix), .in_vec(act),
    .out_valid(pl_valid), .out_idx(pl_idx), .out_vec(pl_vec)
  );

  // ---------------- output routing
  logic              to_other;
  logic [ADDR_W-1:0] n_out;
  assign to_other = (cur.role == ROLE_PRODUCE);
  assign n_out    = cur.pool_en ? ADDR_W'(cur.n_pix / POOL_WIN) : cur.n_pix;

  assign fo_valid = pl_valid && to_other;
  assign fo_addr  = FAW'(cur.out_base + pl_idx);
  assign fo_data  = pl_vec;

  always_comb begin
    for (int k = 0; k < int'(NWB); k++) begin
      wb_en[k]   = pl_valid && !to_other;
      wb_addr[k] = IAW'(cur.out_base + ADDR_W'(k) * n_out + pl_idx);
      for (int r = 0; r < int'(ROWS); r++)
        wb_data[k][r] = (k * ROWS + r < int'(COLS)) ? pl_vec[(k * ROWS + r) % COLS] : FP_ZERO;
    end
  end

endmodule
