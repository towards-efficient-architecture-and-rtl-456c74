// tb_fm_sys_ctrl: over several frames, loads random link weights and a
// random threshold, checks keep[l] == (w_l >= th) compared as reals, the
// ready flags set by link_done reports and cleared at the next start, and
// that done waits for both halves.
module tb_fm_sys_ctrl;
  import fp_ref_pkg::*;
  localparam int NLINKS = 8;
  logic              clk = 0, rst_n = 0;
  logic              th_we, wl_we, start, start_halves;
  logic [31:0]       th_in, wl_in;
  logic [2:0]        wl_idx, link_id_a, link_id_b;
  logic              link_done_a, link_done_b, half_done_a, half_done_b;
  logic [NLINKS-1:0] keep, ready, exp_ready;
  logic              busy, done;
  logic [31:0]       w [NLINKS];
  logic [31:0]       th;
  int                checks = 0, failures = 0, nkeep = 0, nprune = 0;

  fm_sys_ctrl #(.NLINKS(NLINKS)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic c, input string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    th_we = 0; wl_we = 0; start = 0; th_in = 0; wl_in = 0; wl_idx = 0;
    link_done_a = 0; link_done_b = 0; half_done_a = 0; half_done_b = 0;
    link_id_a = 0; link_id_b = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 30; f++) begin
      // hypernetwork-like weights in (0,1), threshold in (0,1)
      th = to_fp32(real'($urandom_range(1, 99)) / 100.0);
      th_we = 1; th_in = th; @(negedge clk); th_we = 0;
      for (int l = 0; l < NLINKS; l++) begin
        w[l] = (l == 3) ? th : to_fp32(real'($urandom_range(1, 99)) / 100.0);
        wl_we = 1; wl_idx = 3'(l); wl_in = w[l]; @(negedge clk);
      end
      wl_we = 0;
      start = 1; @(negedge clk); start = 0;
      chk(start_halves && busy && !done, "start pulse");
      for (int l = 0; l < NLINKS; l++) begin
        chk(keep[l] == (to_real(w[l]) >= to_real(th)), "keep");
        if (keep[l]) nkeep++; else nprune++;
      end
      chk(ready == '0, "ready cleared");
      @(negedge clk);
      chk(!start_halves, "start is a pulse");
      exp_ready = '0;
      for (int k = 0; k < 4; k++) begin
        link_done_a = 1; link_id_a = 3'($urandom_range(0, 7));
        link_done_b = 1'($urandom); link_id_b = 3'($urandom_range(0, 7));
        exp_ready[link_id_a] = 1;
        if (link_done_b) exp_ready[link_id_b] = 1;
        @(negedge clk);
        link_done_a = 0; link_done_b = 0;
        chk(ready == exp_ready, "ready flags");
      end
      half_done_a = 1; @(negedge clk); half_done_a = 0;
      repeat (3) @(negedge clk);
      chk(busy && !done, "waits for second half");
      half_done_b = 1; @(negedge clk); half_done_b = 0;
      @(negedge clk);
      chk(!busy && done, "done after both halves");
    end
    chk(nkeep > 0 && nprune > 0, "both outcomes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
