// a3f_top: the fusion accelerator. Two processing halves (half A, e.g. the
// RGB network, and half B, the depth network) run side by side, each on its
// own ROWS x COLS PE array, buffers and job sequencer. They are coupled only
// through the fuseLink buffers: the fuseFilter results a half produces for a
// link are written straight into the other half's fuseLink buffer, and the
// shared system controller prunes links whose weight w_l is below the
// threshold and holds a consumer back until its link has been produced.
// Off-chip memory and the hypernetwork that computes w_l are outside; their
// sides of the interface are the host ports below (buffer fills and reads,
// job tables, threshold and link weights). Protocol: write the buffers, job
// tables, th and w1..wNLINKS; pulse start; wait for done; read results from
// the input buffers. done stays high until the next start.
module a3f_top
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
  localparam int unsigned JW  = $clog2(NJOBS + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  // host ports, index 0 = half A, 1 = half B
  input  logic              hw_en   [2],
  input  logic [IAW-1:0]    hw_addr [2],
  input  fp32_t             hw_data [2][ROWS],
  input  logic              hr_en   [2],
  input  logic [IAW-1:0]    hr_addr [2],
  output fp32_t             hr_data [2][ROWS],
  input  logic              wt_en   [2],
  input  logic [WAW-1:0]    wt_addr [2],
  input  fp32_t             wt_data [2][ROWS],
  input  logic              jt_we   [2],
  input  logic [JW-1:0]     jt_addr [2],
  input  job_t              jt_data [2],
  input  logic [JW-1:0]     n_jobs  [2],
  // pruning threshold and hypernetwork link weights
  input  logic              th_we,
  input  fp32_t             th_in,
  input  logic              wl_we,
  input  logic [LINK_W-1:0] wl_idx,
  input  fp32_t             wl_in,
  // run control and status
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic [NLINKS-1:0] keep,
  output logic [15:0]       cnt_jobs_run     [2],
  output logic [15:0]       cnt_jobs_skipped [2],
  output logic [15:0]       cnt_fused        [2],
  output logic [31:0]       cnt_wait_cycles  [2],
  output logic [31:0]       cnt_cycles       [2]
);

  localparam int unsigned FAW = $clog2(FL_DEPTH);

  logic              start_halves;
  logic [NLINKS-1:0] ready;
  logic              h_busy [2], h_done [2], l_done [2];
  logic [LINK_W-1:0] l_id [2];
  logic              fo_valid [2];
  logic [FAW-1:0]    fo_addr [2];
  fp32_t             fo_data [2][COLS];

  fm_sys_ctrl #(.NLINKS(NLINKS)) u_sys (
    .clk, .rst_n, .th_we, .th_in, .wl_we, .wl_idx, .wl_in,
    .start, .start_halves,
    .link_done_a(l_done[0]), .link_id_a(l_id[0]),
    .link_done_b(l_done[1]), .link_id_b(l_id[1]),
    .half_done_a(h_done[0]), .half_done_b(h_done[1]),
    .keep, .ready, .busy, .done
  );

  for (genvar h = 0; h < 2; h++) begin : g_half
    fm_half #(
      .ROWS(ROWS), .COLS(COLS), .IBUF_DEPTH(IBUF_DEPTH), .WBUF_DEPTH(WBUF_DEPTH),
      .PSUM_DEPTH(PSUM_DEPTH), .FL_DEPTH(FL_DEPTH), .NJOBS(NJOBS), .NLINKS(NLINKS)
    ) u_half (
      .clk, .rst_n,
      .hw_en(hw_en[h]), .hw_addr(hw_addr[h]), .hw_data(hw_data[h]),
      .hr_en(hr_en[h]), .hr_addr(hr_addr[h]), .hr_data(hr_data[h]),
      .wt_en(wt_en[h]), .wt_addr(wt_addr[h]), .wt_data(wt_data[h]),
      .jt_we(jt_we[h]), .jt_addr(jt_addr[h]), .jt_data(jt_data[h]), .n_jobs(n_jobs[h]),
      .start(start_halves), .busy(h_busy[h]), .done(h_done[h]),
      .keep, .ready, .link_done(l_done[h]), .link_id(l_id[h]),
      // results leave towards the other half ...
      .fo_valid(fo_valid[h]), .fo_addr(fo_addr[h]), .fo_data(fo_data[h]),
      // ... and arrive from it
      .fi_valid(fo_valid[1-h]), .fi_addr(fo_addr[1-h]), .fi_data(fo_data[1-h]),
      .cnt_jobs_run(cnt_jobs_run[h]), .cnt_jobs_skipped(cnt_jobs_skipped[h]),
      .cnt_fused(cnt_fused[h]), .cnt_wait_cycles(cnt_wait_cycles[h]),
      .cnt_cycles(cnt_cycles[h])
    );
  end

endmodule
