// tb_fm_pool: streams random fp32 vectors with random gaps through the pool
// stage. With pooling on, every group of four valid vectors must produce one
// output, on the next cycle, equal to the channel-wise maximum (compared as
// reals) with index = pixel/4; with pooling off, each vector passes through
// one cycle later with its own index.
module tb_fm_pool;
  import fp_ref_pkg::*;
  localparam int N = 16, WIN = 4, IDX_W = 16;
  logic             clk = 0, rst_n = 0;
  logic             en, clear, in_valid, out_valid;
  logic [IDX_W-1:0] in_idx, out_idx;
  logic [31:0]      in_vec [N], out_vec [N];
  logic [31:0]      exp_v [N];
  logic [31:0]      grp [WIN][N];
  logic             exp_valid;
  int               exp_idx, gcnt, nout = 0, nexp = 0;
  int               checks = 0, failures = 0;

  fm_pool #(.N(N), .WIN(WIN), .IDX_W(IDX_W)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real best;
    en = 0; clear = 0; in_valid = 0; in_idx = 0; in_vec = '{default: 0};
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int mode = 0; mode < 2; mode++) begin
      en = 1'(mode == 0);
      clear = 1; @(negedge clk); clear = 0;
      gcnt = 0;
      for (int p = 0; p < 64; ) begin
        exp_valid = 0;
        if ($urandom_range(0, 3) != 0) begin
          in_valid = 1; in_idx = IDX_W'(p);
          for (int i = 0; i < N; i++) begin in_vec[i] = rand_fp(6); grp[gcnt][i] = in_vec[i]; end
          if (!en) begin
            exp_valid = 1; exp_idx = p; exp_v = in_vec;
          end else if (gcnt == WIN - 1) begin
            exp_valid = 1; exp_idx = p / WIN;
            for (int i = 0; i < N; i++) begin
              exp_v[i] = grp[0][i]; best = to_real(grp[0][i]);
              for (int g = 1; g < WIN; g++)
                if (to_real(grp[g][i]) > best) begin best = to_real(grp[g][i]); exp_v[i] = grp[g][i]; end
            end
          end
          gcnt = en ? (gcnt + 1) % WIN : 0;
          p++;
        end else in_valid = 0;
        @(negedge clk);
        checks++;
        if (out_valid !== exp_valid) begin failures++; $display("FAIL valid at p=%0d", p); end
        if (exp_valid) begin
          nexp++;
          checks++;
          if (int'(out_idx) != exp_idx) begin failures++; $display("FAIL idx %0d exp %0d", out_idx, exp_idx); end
          for (int i = 0; i < N; i++) begin
            checks++;
            if (out_vec[i] !== exp_v[i]) begin failures++; $display("FAIL val %0d: %h exp %h", i, out_vec[i], exp_v[i]); end
          end
        end
      end
      in_valid = 0;
      @(negedge clk);
    end
    checks++;
    if (nexp != 16 + 64) begin failures++; $display("FAIL outputs %0d", nexp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
