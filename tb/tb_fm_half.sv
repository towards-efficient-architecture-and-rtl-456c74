// tb_fm_half: one processing half on its own, with the system controller's
// keep/ready signals and the other half's fuseLink writes driven by the
// test. Jobs: a three-pass layer with ReLU and pooling, a fuseFilter job
// producing link 2 (its fo_* writes are captured and compared), and a layer
// consuming link 5 from vectors the test wrote into the fuseLink buffer.
// Run once with link 2 kept and once with it pruned (producer skipped, no
// fo_* traffic). Results are compared with the reference model, and the
// cycle count with the controller's timing formula.
module tb_fm_half;
  import fp_ref_pkg::*;
  import a3f_pkg::*;
  import a3f_model_pkg::*;

  localparam int ROWS = ROWS_DEF, COLS = COLS_DEF, NLINKS = NLINKS_DEF;
  localparam int IAW = $clog2(IBUF_DEPTH_DEF), WAW = $clog2(WBUF_DEPTH_DEF);
  localparam int FAW = $clog2(FL_DEPTH_DEF);
  localparam int JW = $clog2(NJOBS_DEF + 1), DRAIN = ROWS + COLS + 3;

  logic              clk = 0, rst_n = 0;
  logic              hw_en, hr_en, wt_en, jt_we, start, busy, done, link_done;
  logic [IAW-1:0]    hw_addr, hr_addr;
  logic [WAW-1:0]    wt_addr;
  logic [31:0]       hw_data [ROWS], hr_data [ROWS], wt_data [ROWS];
  logic [JW-1:0]     jt_addr, n_jobs;
  job_t              jt_data;
  logic [NLINKS-1:0] keep, ready;
  logic [LINK_W-1:0] link_id;
  logic              fo_valid, fi_valid;
  logic [FAW-1:0]    fo_addr, fi_addr;
  logic [31:0]       fo_data [COLS], fi_data [COLS];
  logic [15:0]       cnt_jobs_run, cnt_jobs_skipped, cnt_fused;
  logic [31:0]       cnt_wait_cycles, cnt_cycles;

  int checks = 0, failures = 0, n_fo = 0, n_link_done = 0;

  fm_half dut (.*);

  always #5 clk = ~clk;
  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  a3f_model m;
  job_t     jobs [3];

  // capture of the fuseLink results this half sends to the other half
  always @(negedge clk) if (rst_n) begin
    if (fo_valid) begin
      n_fo++;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (fo_data[c] !== m.fbuf[1][int'(fo_addr)][c]) begin
          failures++; $display("FAIL fo addr %0d col %0d got %h exp %h", fo_addr, c, fo_data[c], m.fbuf[1][int'(fo_addr)][c]);
        end
      end
    end
    if (link_done) begin
      n_link_done++;
      chk(link_id == 3'd2, "link_done id");
    end
  end

  function automatic job_t mk(int n_pix, int n_pass, int in_base, int w_base, int out_base,
                              int fl_base, bit relu, bit pool, link_role_e role, int link);
    job_t j;
    j.n_pix = ADDR_W'(n_pix); j.n_pass = 8'(n_pass); j.in_base = ADDR_W'(in_base);
    j.w_base = ADDR_W'(w_base); j.out_base = ADDR_W'(out_base); j.fl_base = ADDR_W'(fl_base);
    j.relu_en = relu; j.pool_en = pool; j.role = role; j.link = LINK_W'(link);
    return j;
  endfunction

  initial begin
    int exp_cyc;
    hw_en = 0; hr_en = 0; wt_en = 0; jt_we = 0; start = 0; fi_valid = 0;
    hw_addr = 0; hr_addr = 0; wt_addr = 0; jt_addr = 0; jt_data = '0; n_jobs = 0;
    fi_addr = 0; hw_data = '{default: 0}; wt_data = '{default: 0}; fi_data = '{default: 0};
    keep = '0; ready = '0;
    m = new(ROWS, COLS, IBUF_DEPTH_DEF, FL_DEPTH_DEF);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int a = 0; a < 96; a++) begin
      hw_en = 1; hw_addr = IAW'(a); m.ibuf[0][a] = new[ROWS];
      for (int r = 0; r < ROWS; r++) begin hw_data[r] = rand_fp(2); m.ibuf[0][a][r] = hw_data[r]; end
      @(negedge clk);
    end
    hw_en = 0;
    for (int a = 0; a < 128; a++) begin
      wt_en = 1; wt_addr = WAW'(a); m.wbuf[0][a] = new[ROWS];
      for (int r = 0; r < ROWS; r++) begin wt_data[r] = to_fp32(to_real(rand_fp(2)) / 8.0); m.wbuf[0][a][r] = wt_data[r]; end
      @(negedge clk);
    end
    wt_en = 0;
    // vectors from the "other half" for link 5, at fuseLink addresses 10..17
    for (int a = 10; a < 18; a++) begin
      fi_valid = 1; fi_addr = FAW'(a); m.fbuf[0][a] = new[COLS];
      for (int c = 0; c < COLS; c++) begin fi_data[c] = rand_fp(3); m.fbuf[0][a][c] = fi_data[c]; end
      @(negedge clk);
    end
    fi_valid = 0;
    jobs[0] = mk(32, 3,   0,  0, 200,  0, 1, 1, ROLE_NONE,    0);
    jobs[1] = mk( 8, 2, 200, 48,   4,  0, 0, 0, ROLE_PRODUCE, 2);
    jobs[2] = mk( 8, 2, 200, 80, 300, 10, 1, 0, ROLE_CONSUME, 5);
    for (int i = 0; i < 3; i++) begin
      jt_we = 1; jt_addr = JW'(i); jt_data = jobs[i]; @(negedge clk);
    end
    jt_we = 0; n_jobs = JW'(3);

    for (int f = 0; f < 2; f++) begin
      keep = '0; keep[5] = 1; keep[2] = (f == 0);
      ready = '0;
      n_fo = 0; n_link_done = 0;
      // expected results first, so the fo_* monitor can compare
      m.run_job(0, jobs[0], 1'b0);
      m.run_job(0, jobs[1], keep[2]);
      m.run_job(0, jobs[2], keep[5]);
      start = 1; @(negedge clk); start = 0;
      repeat (500) @(negedge clk);
      chk(busy && cnt_jobs_run == 16'd3 - 16'(f), "consumer waits for ready");
      ready[5] = 1;
      while (!done) @(negedge clk);
      exp_cyc = 1 + (1 + 3 * (COLS + 32 + DRAIN)) + (f == 0 ? 1 + 2 * (COLS + 8 + DRAIN) : 1)
              + (1 + 2 * (COLS + 8 + DRAIN));
      chk(int'(cnt_cycles) == exp_cyc + int'(cnt_wait_cycles), "cycle count");
      chk(cnt_wait_cycles > 0, "stall counted");
      chk(n_fo == (f == 0 ? 8 : 0), "fuseLink output count");
      chk(n_link_done == (f == 0 ? 1 : 0), "link_done count");
      chk(cnt_jobs_skipped == 16'(f), "skip count");
      chk(cnt_fused == 16'd1, "fused count");
      for (int a = 200; a < 216; a++) begin
        hr_en = 1; hr_addr = IAW'(a); @(negedge clk); hr_en = 0;
        for (int r = 0; r < ROWS; r++) chk(hr_data[r] === m.ibuf[0][a][r], "layer output");
      end
      for (int a = 300; a < 316; a++) begin
        hr_en = 1; hr_addr = IAW'(a); @(negedge clk); hr_en = 0;
        for (int r = 0; r < ROWS; r++) chk(hr_data[r] === m.ibuf[0][a][r], "fused layer output");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
