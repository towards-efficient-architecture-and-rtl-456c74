// tb_fm_half_ctrl: runs job lists through the sequencer alone and checks,
// against a model computed from the job table: the weight and input
// addresses it issues, the first/last/fuse flags, that a producer job of a
// pruned link is skipped, that a consumer of a kept link waits for ready,
// the link_done reports and the exact cycle count of each frame
// (per job 1 + n_pass*(COLS + n_pix + ROWS+COLS+3), plus waiting, plus 1).
module tb_fm_half_ctrl;
  import a3f_pkg::*;
  localparam int ROWS = 8, COLS = 16, NJOBS = 16, NLINKS = 8, JW = $clog2(NJOBS + 1);
  localparam int DRAIN = ROWS + COLS + 3;

  logic              clk = 0, rst_n = 0;
  logic              jt_we, start, busy, done, link_done;
  logic [JW-1:0]     jt_addr, n_jobs;
  job_t              jt_data, cur;
  logic [NLINKS-1:0] keep, ready;
  logic [LINK_W-1:0] link_id;
  logic              pool_clear, w_rd_en, issue_valid, issue_first, issue_last, issue_fuse;
  logic [ADDR_W-1:0] w_rd_addr, issue_pix, x_rd_addr, fl_rd_addr;
  logic [15:0]       cnt_jobs_run, cnt_jobs_skipped, cnt_fused;
  logic [31:0]       cnt_wait_cycles, cnt_cycles;
  int                checks = 0, failures = 0;

  fm_half_ctrl #(.ROWS(ROWS), .COLS(COLS), .NJOBS(NJOBS), .NLINKS(NLINKS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  job_t jobs [NJOBS];
  // expected issue streams
  int   exp_w [$], exp_x [$], exp_fl [$], exp_flags [$], exp_links [$];
  int   nw, nx, nlink, ncyc;
  logic monitor_on = 0;

  always @(negedge clk) if (monitor_on) begin
    ncyc++;
    if (w_rd_en) begin
      chk(exp_w.size() > 0 && int'(w_rd_addr) == exp_w[0], "weight address");
      if (exp_w.size() > 0) void'(exp_w.pop_front());
    end
    if (issue_valid) begin
      chk(exp_x.size() > 0 && int'(x_rd_addr) == exp_x[0], "input address");
      chk(exp_fl.size() > 0 && int'(fl_rd_addr) == exp_fl[0], "fuseLink address");
      chk(exp_flags.size() > 0 && int'({issue_first, issue_last, issue_fuse}) == exp_flags[0], "flags");
      if (exp_x.size() > 0) begin
        void'(exp_x.pop_front()); void'(exp_fl.pop_front()); void'(exp_flags.pop_front());
      end
    end
    if (link_done) begin
      chk(exp_links.size() > 0 && int'(link_id) == exp_links[0], "link_done id");
      if (exp_links.size() > 0) void'(exp_links.pop_front());
    end
  end

  initial begin
    int nj, exp_cyc, exp_skip, np, wait_c;
    logic wait_link [NLINKS];
    jt_we = 0; start = 0; jt_addr = 0; jt_data = '0; n_jobs = 0; keep = '0; ready = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 6; f++) begin
      nj = $urandom_range(1, 6);
      keep = NLINKS'($urandom);
      ready = '0;
      exp_cyc = 1; exp_skip = 0; wait_c = 0;
      for (int i = 0; i < nj; i++) begin
        jobs[i] = '0;
        jobs[i].n_pix    = ADDR_W'($urandom_range(1, 40));
        jobs[i].n_pass   = 8'($urandom_range(0, 3));
        jobs[i].in_base  = ADDR_W'($urandom_range(0, 500));
        jobs[i].w_base   = ADDR_W'($urandom_range(0, 500));
        jobs[i].fl_base  = ADDR_W'($urandom_range(0, 100));
        jobs[i].role     = link_role_e'($urandom_range(0, 2));
        jobs[i].link     = LINK_W'($urandom_range(0, 7));
        jt_we = 1; jt_addr = JW'(i); jt_data = jobs[i];
        @(negedge clk);
        // model
        np = (jobs[i].n_pass == 0) ? 1 : int'(jobs[i].n_pass);
        if (jobs[i].role == ROLE_PRODUCE && !keep[jobs[i].link]) begin
          exp_skip++; exp_cyc += 1;
        end else begin
          exp_cyc += 1 + np * (COLS + int'(jobs[i].n_pix) + DRAIN);
          for (int p = 0; p < np; p++) begin
            for (int j = 0; j < COLS; j++) exp_w.push_back(int'(jobs[i].w_base) + p * COLS + j);
            for (int x = 0; x < int'(jobs[i].n_pix); x++) begin
              exp_x.push_back(int'(jobs[i].in_base) + p * int'(jobs[i].n_pix) + x);
              exp_fl.push_back(int'(jobs[i].fl_base) + x);
              exp_flags.push_back({p == 0, p == np - 1,
                                   p == 0 && jobs[i].role == ROLE_CONSUME && keep[jobs[i].link]});
            end
          end
          if (jobs[i].role == ROLE_PRODUCE) exp_links.push_back(int'(jobs[i].link));
        end
      end
      jt_we = 0;
      n_jobs = JW'(nj);
      // a consumer of a kept link waits until ready is raised 30 cycles later
      ncyc = 0; monitor_on = 1;
      start = 1; @(negedge clk); start = 0;
      for (int c = 0; c < 30 && !done; c++) @(negedge clk);
      ready = '1;
      while (!done) @(negedge clk);
      monitor_on = 0;
      chk(cnt_jobs_skipped == 16'(exp_skip), "skipped count");
      chk(cnt_jobs_run == 16'(nj - exp_skip), "run count");
      chk(int'(cnt_cycles) == exp_cyc + int'(cnt_wait_cycles), "cycle count");
      chk(exp_w.size() == 0 && exp_x.size() == 0 && exp_links.size() == 0, "all issued");
      $display("frame %0d: %0d jobs, %0d skipped, %0d fused, %0d wait cycles, %0d cycles",
               f, nj, cnt_jobs_skipped, cnt_fused, cnt_wait_cycles, cnt_cycles);
      exp_w.delete(); exp_x.delete(); exp_fl.delete(); exp_flags.delete(); exp_links.delete();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
