// tb_a3f_fusion8: the eight-link fusion network with dynamic pruning.
//
// Each half runs a five-layer branch (layer 0 with ReLU and 2x2 pooling,
// layers 1-4 with ReLU). After each of layers 0-3 both halves compute a
// fuseFilter: half A produces link 2i for half B and half B link 2i+1 for
// half A, and layer i+1 of each half consumes the link of the other half.
// That gives the eight links w1..w8 of a bidirectional, distance-1 fusion
// network. The link weights are fixed pseudo-random fractions standing in
// for hypernetwork outputs, and the same input is run with th = 0, 0.2, 0.4
// and 1.0. Every layer output is compared with the reference model; the test
// checks that the number of skipped producer jobs equals the number of
// pruned links and that a frame with every link pruned is faster than one
// with every link kept.
module tb_a3f_fusion8;
  import fp_ref_pkg::*;
  import a3f_pkg::*;
  import a3f_model_pkg::*;

  localparam int ROWS = ROWS_DEF, COLS = COLS_DEF, NLINKS = NLINKS_DEF;
  localparam int IAW = $clog2(IBUF_DEPTH_DEF), WAW = $clog2(WBUF_DEPTH_DEF);
  localparam int JW = $clog2(NJOBS_DEF + 1);
  localparam int NL = 5;          // layers per branch
  localparam int NJ = 2 * NL - 1; // jobs per half

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

  a3f_top dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (200000) @(posedge clk);
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
  job_t     jobs [2][NJ];
  real      wl [NLINKS] = '{0.35, 0.15, 0.62, 0.28, 0.81, 0.05, 0.47, 0.22};

  function automatic job_t mk(int n_pix, int n_pass, int in_base, int w_base, int out_base,
                              int fl_base, bit relu, bit pool, link_role_e role, int link);
    job_t j;
    j.n_pix = ADDR_W'(n_pix); j.n_pass = 8'(n_pass); j.in_base = ADDR_W'(in_base);
    j.w_base = ADDR_W'(w_base); j.out_base = ADDR_W'(out_base); j.fl_base = ADDR_W'(fl_base);
    j.relu_en = relu; j.pool_en = pool; j.role = role; j.link = LINK_W'(link);
    return j;
  endfunction

  function automatic int out_addr(int layer);
    return 100 + 10 * layer;
  endfunction

  initial begin
    real ths [4] = '{0.0, 0.2, 0.4, 1.0};
    int  frame_cyc [4];
    int  npruned, nskip, j, ji;
    for (int h = 0; h < 2; h++) begin
      hw_en[h] = 0; hr_en[h] = 0; wt_en[h] = 0; jt_we[h] = 0; hw_addr[h] = 0; hr_addr[h] = 0;
      wt_addr[h] = 0; jt_addr[h] = 0; jt_data[h] = '0; n_jobs[h] = 0;
      for (int r = 0; r < ROWS; r++) begin hw_data[h][r] = 0; wt_data[h][r] = 0; end
    end
    th_we = 0; wl_we = 0; start = 0; th_in = 0; wl_in = 0; wl_idx = 0;
    m = new(ROWS, COLS, IBUF_DEPTH_DEF, FL_DEPTH_DEF);
    repeat (3) @(negedge clk);
    rst_n = 1;

    for (int h = 0; h < 2; h++) begin
      for (int a = 0; a < 32; a++) begin
        hw_en[h] = 1; hw_addr[h] = IAW'(a); m.ibuf[h][a] = new[ROWS];
        for (int r = 0; r < ROWS; r++) begin hw_data[h][r] = rand_fp(2); m.ibuf[h][a][r] = hw_data[h][r]; end
        @(negedge clk);
      end
      hw_en[h] = 0;
      for (int a = 0; a < NJ * 32; a++) begin
        wt_en[h] = 1; wt_addr[h] = WAW'(a); m.wbuf[h][a] = new[ROWS];
        for (int r = 0; r < ROWS; r++) begin
          wt_data[h][r] = to_fp32(to_real(rand_fp(2)) / 8.0); m.wbuf[h][a][r] = wt_data[h][r];
        end
        @(negedge clk);
      end
      wt_en[h] = 0;
    end

    // job lists: L0, P0, L1, P1, L2, P2, L3, P3, L4
    for (int h = 0; h < 2; h++) begin
      j = 0;
      for (int l = 0; l < NL; l++) begin
        if (l == 0)
          jobs[h][j] = mk(16, 2, 0, j * 32, out_addr(0), 0, 1, 1, ROLE_NONE, 0);
        else
          jobs[h][j] = mk(4, 2, out_addr(l - 1), j * 32, out_addr(l), 4 * (l - 1), 1, 0,
                          ROLE_CONSUME, 2 * (l - 1) + (1 - h));
        j++;
        if (l < NL - 1) begin
          jobs[h][j] = mk(4, 2, out_addr(l), j * 32, 4 * l, 0, 0, 0, ROLE_PRODUCE, 2 * l + h);
          j++;
        end
      end
      for (int i = 0; i < NJ; i++) begin
        jt_we[h] = 1; jt_addr[h] = JW'(i); jt_data[h] = jobs[h][i]; @(negedge clk);
      end
      jt_we[h] = 0; n_jobs[h] = JW'(NJ);
    end
    for (int l = 0; l < NLINKS; l++) begin
      wl_we = 1; wl_idx = LINK_W'(l); wl_in = to_fp32(wl[l]); @(negedge clk);
    end
    wl_we = 0;

    for (int f = 0; f < 4; f++) begin
      th_we = 1; th_in = to_fp32(ths[f]); @(negedge clk); th_we = 0;
      start = 1; @(negedge clk); start = 0;
      frame_cyc[f] = 0;
      while (!done) begin @(negedge clk); frame_cyc[f]++; end
      npruned = 0;
      for (int l = 0; l < NLINKS; l++) if (!(wl[l] >= ths[f])) npruned++;
      nskip = int'(cnt_jobs_skipped[0]) + int'(cnt_jobs_skipped[1]);
      $display("th=%0.1f: keep=%b pruned=%0d skipped=%0d fused=%0d frame cycles=%0d (A %0d, B %0d; waits A %0d, B %0d)",
               ths[f], keep, npruned, nskip, cnt_fused[0] + cnt_fused[1], frame_cyc[f],
               cnt_cycles[0], cnt_cycles[1], cnt_wait_cycles[0], cnt_wait_cycles[1]);
      for (int l = 0; l < NLINKS; l++) chk(keep[l] == (wl[l] >= ths[f]), "keep decision");
      chk(nskip == npruned, "one skipped producer per pruned link");
      chk(int'(cnt_fused[0]) + int'(cnt_fused[1]) == NLINKS - npruned, "one fused consumer per kept link");
      // reference, stage by stage (producers of stage l before consumers of stage l+1)
      for (int l = 0; l < NL; l++)
        for (int h = 0; h < 2; h++) begin
          ji = 2 * l;
          m.run_job(h, jobs[h][ji], (l == 0) ? 1'b0 : 1'(wl[jobs[h][ji].link] >= ths[f]));
          if (l < NL - 1) m.run_job(h, jobs[h][ji + 1], 1'(wl[jobs[h][ji + 1].link] >= ths[f]));
        end
      for (int h = 0; h < 2; h++)
        for (int l = 0; l < NL; l++)
          for (int a = out_addr(l); a < out_addr(l) + 8; a++) begin
            hr_en[h] = 1; hr_addr[h] = IAW'(a); @(negedge clk); hr_en[h] = 0;
            for (int r = 0; r < ROWS; r++) begin
              checks++;
              if (hr_data[h][r] !== m.ibuf[h][a][r]) begin
                failures++;
                $display("FAIL th=%0.1f half %0d layer %0d addr %0d lane %0d: %h expected %h",
                         ths[f], h, l, a, r, hr_data[h][r], m.ibuf[h][a][r]);
              end
            end
          end
    end
    chk(frame_cyc[3] < frame_cyc[0], "pruning every link shortens the frame");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
