// tb_a3f_top: end-to-end test of the accelerator at its default sizes.
//
// Each half runs a three-layer slice of a two-branch fusion network:
//   job 0  layer with several input passes, ReLU and 2x2 max pooling
//   job 1  fuseFilter of a link (ROLE_PRODUCE) into the other half
//   job 2  next layer consuming the other half's link (ROLE_CONSUME), ReLU
// Half A produces link 0 (consumed by half B) and half B link 1 (consumed
// by half A). Half B's first layer has more input channels, so half A must
// stall until link 1 is ready. Two frames are run with the thresholds
// th = 0.2 and th = 0.4 and the link weights w1 = 0.3, w2 = 0.5: in the
// first frame both links are kept, in the second link 0 is pruned, so half
// A skips its fuseFilter job and half B computes without it.
// All results read back from the input buffers are compared with the
// reference model, and the cycle count of each half with the controller's
// timing formula. Mechanisms counted: fused consume, pruned skip, stall for
// a link, multi-pass accumulation, pooling.
module tb_a3f_top;
  import fp_ref_pkg::*;
  import a3f_pkg::*;
  import a3f_model_pkg::*;

  localparam int ROWS = ROWS_DEF, COLS = COLS_DEF, NLINKS = NLINKS_DEF;
  localparam int IAW = $clog2(IBUF_DEPTH_DEF), WAW = $clog2(WBUF_DEPTH_DEF);
  localparam int JW = $clog2(NJOBS_DEF + 1), DRAIN = ROWS + COLS + 3;

  logic              clk = 0, rst_n = 0;
  logic              hw_en [2], hr_en [2], wt_en [2], jt_we [2];
  logic [IAW-1:0]    hw_addr [2], hr_addr [2];
  logic [WAW-1:0]    wt_addr [2];
  logic [31:0]       hw_data [2][ROWS], hr_data [2][ROWS], wt_data [2][ROWS];
  logic [JW-1:0]     jt_addr [2], n_jobs [2];
  job_t              jt_data [2];
  logic              th_we, wl_we, start, busy, done;
  logic [31:0]       th_in, wl_in;
  logic [LINK_W-1:0] wl_idx;
  logic [NLINKS-1:0] keep;
  logic [15:0]       cnt_jobs_run [2], cnt_jobs_skipped [2], cnt_fused [2];
  logic [31:0]       cnt_wait_cycles [2], cnt_cycles [2];

  int checks = 0, failures = 0;
  int n_fused = 0, n_skip = 0, n_stall = 0, n_multipass = 0, n_pool = 0, n_relu_neg = 0;

  a3f_top dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  a3f_model m;
  job_t     jobs [2][3];
  real      wl [NLINKS];

  function automatic job_t mk(int n_pix, int n_pass, int in_base, int w_base, int out_base,
                              int fl_base, bit relu, bit pool, link_role_e role, int link);
    job_t j;
    j.n_pix = ADDR_W'(n_pix); j.n_pass = 8'(n_pass); j.in_base = ADDR_W'(in_base);
    j.w_base = ADDR_W'(w_base); j.out_base = ADDR_W'(out_base); j.fl_base = ADDR_W'(fl_base);
    j.relu_en = relu; j.pool_en = pool; j.role = role; j.link = LINK_W'(link);
    return j;
  endfunction

  function automatic int job_cycles(job_t j);
    int np = (j.n_pass == 0) ? 1 : int'(j.n_pass);
    return 1 + np * (COLS + int'(j.n_pix) + DRAIN);
  endfunction

  task automatic idle_inputs();
    for (int h = 0; h < 2; h++) begin
      hw_en[h] = 0; hr_en[h] = 0; wt_en[h] = 0; jt_we[h] = 0;
      hw_addr[h] = 0; hr_addr[h] = 0; wt_addr[h] = 0; jt_addr[h] = 0; jt_data[h] = '0;
      n_jobs[h] = 0;
      for (int r = 0; r < ROWS; r++) begin hw_data[h][r] = 0; wt_data[h][r] = 0; end
    end
    th_we = 0; wl_we = 0; start = 0; th_in = 0; wl_in = 0; wl_idx = 0;
  endtask

  task automatic check_region(int h, int base, int nwords, string what);
    for (int a = base; a < base + nwords; a++) begin
      hr_en[h] = 1; hr_addr[h] = IAW'(a);
      @(negedge clk);
      hr_en[h] = 0;
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (hr_data[h][r] !== m.ibuf[h][a][r]) begin
          failures++;
          $display("FAIL %s half %0d addr %0d lane %0d: got %h expected %h",
                   what, h, a, r, hr_data[h][r], m.ibuf[h][a][r]);
        end
        if (m.ibuf[h][a][r] == 32'h0) n_relu_neg++;
      end
    end
  endtask

  initial begin
    real ths [2] = '{0.2, 0.4};
    int  exp_cyc [2];
    int  t0;
    idle_inputs();
    m = new(ROWS, COLS, IBUF_DEPTH_DEF, FL_DEPTH_DEF);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // input feature maps and weights
    for (int h = 0; h < 2; h++) begin
      for (int a = 0; a < 64; a++) begin
        hw_en[h] = 1; hw_addr[h] = IAW'(a);
        m.ibuf[h][a] = new[ROWS];
        for (int r = 0; r < ROWS; r++) begin hw_data[h][r] = rand_fp(2); m.ibuf[h][a][r] = hw_data[h][r]; end
        @(negedge clk);
      end
      hw_en[h] = 0;
      for (int a = 0; a < 128; a++) begin
        wt_en[h] = 1; wt_addr[h] = WAW'(a);
        m.wbuf[h][a] = new[ROWS];
        for (int r = 0; r < ROWS; r++) begin
          wt_data[h][r] = to_fp32(to_real(rand_fp(2)) / 8.0);
          m.wbuf[h][a][r] = wt_data[h][r];
        end
        @(negedge clk);
      end
      wt_en[h] = 0;
    end

    // jobs: half A (0) produces link 0 and consumes link 1; half B the reverse
    jobs[0][0] = mk(16, 2,   0,  0, 200, 0, 1, 1, ROLE_NONE,    0);
    jobs[0][1] = mk( 4, 2, 200, 32,   0, 0, 0, 0, ROLE_PRODUCE, 0);
    jobs[0][2] = mk( 4, 2, 200, 64, 300, 0, 1, 0, ROLE_CONSUME, 1);
    jobs[1][0] = mk(16, 4,   0,  0, 200, 0, 1, 1, ROLE_NONE,    0);
    jobs[1][1] = mk( 4, 2, 200, 64,   0, 0, 0, 0, ROLE_PRODUCE, 1);
    jobs[1][2] = mk( 4, 2, 200, 96, 300, 0, 1, 0, ROLE_CONSUME, 0);
    for (int h = 0; h < 2; h++) begin
      for (int i = 0; i < 3; i++) begin
        jt_we[h] = 1; jt_addr[h] = JW'(i); jt_data[h] = jobs[h][i];
        @(negedge clk);
      end
      jt_we[h] = 0; n_jobs[h] = JW'(3);
    end

    // link weights as a hypernetwork would give them: w1 = 0.3, w2 = 0.5
    wl[0] = 0.3; wl[1] = 0.5;
    for (int l = 2; l < NLINKS; l++) wl[l] = 0.9;
    for (int l = 0; l < NLINKS; l++) begin
      wl_we = 1; wl_idx = LINK_W'(l); wl_in = to_fp32(wl[l]);
      @(negedge clk);
    end
    wl_we = 0;

    for (int f = 0; f < 2; f++) begin
      th_we = 1; th_in = to_fp32(ths[f]); @(negedge clk); th_we = 0;
      start = 1; @(negedge clk); start = 0;
      t0 = $time;
      while (!done) @(negedge clk);
      $display("frame %0d (th=%0.1f): keep=%b, cycles A=%0d B=%0d, waits A=%0d B=%0d, skipped A=%0d B=%0d, fused A=%0d B=%0d",
               f, ths[f], keep, cnt_cycles[0], cnt_cycles[1], cnt_wait_cycles[0], cnt_wait_cycles[1],
               cnt_jobs_skipped[0], cnt_jobs_skipped[1], cnt_fused[0], cnt_fused[1]);
      // reference, in an order that respects the link dependencies
      m.run_job(0, jobs[0][0], 1'b0);
      m.run_job(1, jobs[1][0], 1'b0);
      m.run_job(0, jobs[0][1], 1'(wl[0] >= ths[f]));
      m.run_job(1, jobs[1][1], 1'(wl[1] >= ths[f]));
      m.run_job(0, jobs[0][2], 1'(wl[1] >= ths[f]));
      m.run_job(1, jobs[1][2], 1'(wl[0] >= ths[f]));
      chk(keep[0] == (wl[0] >= ths[f]) && keep[1] == (wl[1] >= ths[f]), "keep decision");
      for (int h = 0; h < 2; h++) begin
        check_region(h, 200, 8, "layer 1");
        check_region(h, 300, 8, "layer 2");
        exp_cyc[h] = 1;
        for (int i = 0; i < 3; i++)
          if (!(jobs[h][i].role == ROLE_PRODUCE && !keep[jobs[h][i].link]))
            exp_cyc[h] += job_cycles(jobs[h][i]);
          else exp_cyc[h] += 1;
        chk(int'(cnt_cycles[h]) == exp_cyc[h] + int'(cnt_wait_cycles[h]), "cycle count");
        n_fused += int'(cnt_fused[h]);
        n_skip  += int'(cnt_jobs_skipped[h]);
        if (cnt_wait_cycles[h] != 0) n_stall++;
        n_multipass += 3 - int'(cnt_jobs_skipped[h]);
        n_pool++;
      end
      if (f == 0) chk(cnt_fused[0] == 1 && cnt_fused[1] == 1 && cnt_jobs_skipped[0] == 0, "frame 0 links kept");
      if (f == 1) chk(cnt_fused[1] == 0 && cnt_jobs_skipped[0] == 1 && cnt_fused[0] == 1, "frame 1 link 0 pruned");
    end
    $display("mechanisms: fused=%0d pruned_skip=%0d stall=%0d multipass=%0d pool=%0d relu_zero=%0d",
             n_fused, n_skip, n_stall, n_multipass, n_pool, n_relu_neg);
    chk(n_fused > 0, "fuseLink merge happened");
    chk(n_skip > 0, "pruned link skipped");
    chk(n_stall > 0, "stall for fuseLink happened");
    chk(n_multipass > 0, "multi-pass accumulation happened");
    chk(n_pool > 0, "pooling happened");
    chk(n_relu_neg > 0, "ReLU clipped values");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
