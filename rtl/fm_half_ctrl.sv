// fm_half_ctrl: job sequencer of one half ("its own controlling logic").
//
// The host writes up to NJOBS layer jobs (a3f_pkg::job_t) into the job table
// and sets n_jobs; a start pulse runs them in order. For each job:
//   FETCH   read the entry and decide. A ROLE_PRODUCE job whose link is
//           pruned (keep low) is skipped entirely, saving its time. A
//           ROLE_CONSUME job whose link is kept waits (WAIT) until the system
//           controller reports the link ready, i.e. the other half has
//           written the link's results into this half's fuseLink buffer.
//   LOADW   COLS cycles: reads the pass's COLS weight words (w_base +
//           pass*COLS + j); the datapath shifts each into the array one
//           cycle later.
//   STREAM  n_pix cycles: issues one pixel per cycle, reading input word
//           in_base + pass*n_pix + p, psum word p and fuseLink word
//           fl_base + p. issue_first/last tell the datapath whether the
//           column tops start from zero or from the psum buffer and whether
//           results are final; issue_fuse selects the fuseLink buffer (first
//           pass of a consumer job whose link is kept).
//   DRAIN   DRAIN_CYC cycles until the array pipeline is empty, then the
//           next pass (LOADW) or, after the last pass, the end of the job:
//           a producer pulses link_done with its link index.
// After the last job done pulses for one cycle. Cycle cost of one job:
// n_pass * (COLS + n_pix + DRAIN_CYC) + 1, plus waiting. The skip, wait and
// consume decisions implement the paper's dynamic pruning and aligned
// execution; the state machine and job format are this design's.
module fm_half_ctrl
  import a3f_pkg::*;
#(
  parameter int unsigned ROWS   = a3f_pkg::ROWS_DEF,
  parameter int unsigned COLS   = a3f_pkg::COLS_DEF,
  parameter int unsigned NJOBS  = a3f_pkg::NJOBS_DEF,
  parameter int unsigned NLINKS = a3f_pkg::NLINKS_DEF,
  localparam int unsigned JW    = $clog2(NJOBS + 1),
  localparam int unsigned IW    = (NJOBS > 1) ? $clog2(NJOBS) : 1,
  localparam int unsigned DRAIN_CYC = ROWS + COLS + 3
) (
  input  logic              clk,
  input  logic              rst_n,
  // job table
  input  logic              jt_we,
  input  logic [JW-1:0]     jt_addr,
  input  job_t              jt_data,
  input  logic [JW-1:0]     n_jobs,
  // run control
  input  logic              start,
  output logic              busy,
  output logic              done,
  input  logic [NLINKS-1:0] keep,
  input  logic [NLINKS-1:0] ready,
  output logic              link_done,
  output logic [LINK_W-1:0] link_id,
  // datapath control
  output job_t              cur,
  output logic              pool_clear,
  output logic              w_rd_en,
  output logic [ADDR_W-1:0] w_rd_addr,
  output logic              issue_valid,
  output logic [ADDR_W-1:0] issue_pix,
  output logic [ADDR_W-1:0] x_rd_addr,
  output logic [ADDR_W-1:0] fl_rd_addr,
  output logic              issue_first,
  output logic              issue_last,
  output logic              issue_fuse,
  // activity counters, cleared at start
  output logic [15:0]       cnt_jobs_run,
  output logic [15:0]       cnt_jobs_skipped,
  output logic [15:0]       cnt_fused,
  output logic [31:0]       cnt_wait_cycles,
  output logic [31:0]       cnt_cycles
);

  job_t        jt [NJOBS];
  ctrl_state_e state;
  logic [JW-1:0]     j;
  logic [7:0]        pass;
  logic [ADDR_W-1:0] cnt;
  logic [ADDR_W-1:0] x_base;   // in_base + pass*n_pix
  logic [ADDR_W-1:0] w_base;   // w_base + pass*COLS
  logic              fuse_on;  // this job merges a kept fuseLink
  job_t              nj;
  logic [7:0]        npass_eff;

  assign nj        = jt[j[IW-1:0]];
  assign npass_eff = (cur.n_pass == 8'd0) ? 8'd1 : cur.n_pass;

  always_ff @(posedge clk) begin
    if (jt_we && 32'(jt_addr) < NJOBS) jt[jt_addr[IW-1:0]] <= jt_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state            <= S_IDLE;
      j                <= '0;
      pass             <= '0;
      cnt              <= '0;
      x_base           <= '0;
      w_base           <= '0;
      fuse_on          <= 1'b0;
      cur              <= '0;
      done             <= 1'b0;
      link_done        <= 1'b0;
      link_id          <= '0;
      pool_clear       <= 1'b0;
      cnt_jobs_run     <= '0;
      cnt_jobs_skipped <= '0;
      cnt_fused        <= '0;
      cnt_wait_cycles  <= '0;
      cnt_cycles       <= '0;
    end else begin
      done       <= 1'b0;
      link_done  <= 1'b0;
      pool_clear <= 1'b0;
      if (state != S_IDLE) cnt_cycles <= cnt_cycles + 32'd1;
      unique case (state)
        S_IDLE: if (start) begin
          j                <= '0;
          cnt_jobs_run     <= '0;
          cnt_jobs_skipped <= '0;
          cnt_fused        <= '0;
          cnt_wait_cycles  <= '0;
          cnt_cycles       <= '0;
          state            <= (n_jobs == '0) ? S_DONE : S_FETCH;
        end
        S_FETCH: begin
          cur     <= nj;
          pass    <= '0;
          cnt     <= '0;
          x_base  <= nj.in_base;
          w_base  <= nj.w_base;
          fuse_on <= (nj.role == ROLE_CONSUME) && keep[nj.link];
          if (nj.role == ROLE_PRODUCE && !keep[nj.link]) begin
            cnt_jobs_skipped <= cnt_jobs_skipped + 16'd1;
            j                <= j + JW'(1);
            state            <= (j + JW'(1) == n_jobs) ? S_DONE : S_FETCH;
          end else begin
            pool_clear   <= 1'b1;
            cnt_jobs_run <= cnt_jobs_run + 16'd1;
            if (nj.role == ROLE_CONSUME && keep[nj.link]) begin
              cnt_fused <= cnt_fused + 16'd1;
              state     <= ready[nj.link] ? S_LOADW : S_WAIT;
            end else begin
              state <= S_LOADW;
            end
          end
        end
        S_WAIT: begin
          cnt_wait_cycles <= cnt_wait_cycles + 32'd1;
          if (ready[cur.link]) state <= S_LOADW;
        end
        S_LOADW: begin
          if (cnt == ADDR_W'(COLS - 1)) begin
            cnt   <= '0;
            state <= (cur.n_pix == '0) ? S_DRAIN : S_STREAM;
          end else cnt <= cnt + ADDR_W'(1);
        end
        S_STREAM: begin
          if (cnt == cur.n_pix - ADDR_W'(1)) begin
            cnt   <= '0;
            state <= S_DRAIN;
          end else cnt <= cnt + ADDR_W'(1);
        end
        S_DRAIN: begin
          if (cnt == ADDR_W'(DRAIN_CYC - 1)) begin
            cnt <= '0;
            if (pass + 8'd1 < npass_eff) begin
              pass   <= pass + 8'd1;
              x_base <= x_base + cur.n_pix;
              w_base <= w_base + ADDR_W'(COLS);
              state  <= S_LOADW;
            end else begin
              if (cur.role == ROLE_PRODUCE) begin
                link_done <= 1'b1;
                link_id   <= cur.link;
              end
              j     <= j + JW'(1);
              state <= (j + JW'(1) == n_jobs) ? S_DONE : S_FETCH;
            end
          end else cnt <= cnt + ADDR_W'(1);
        end
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy        = (state != S_IDLE);
  assign w_rd_en     = (state == S_LOADW);
  assign w_rd_addr   = w_base + cnt;
  assign issue_valid = (state == S_STREAM);
  assign issue_pix   = cnt;
  assign x_rd_addr   = x_base + cnt;
  assign fl_rd_addr  = cur.fl_base + cnt;
  assign issue_first = (pass == 8'd0);
  assign issue_last  = (pass + 8'd1 >= npass_eff);
  assign issue_fuse  = fuse_on && (pass == 8'd0);

endmodule
