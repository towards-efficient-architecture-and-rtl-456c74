// tb_fm_pe_array: loads random weights into the array, streams random input
// vectors back to back with random column-top values and fuseLink selects,
// and checks every output vector against a reference dot product, its tag
// and its latency of ROWS+COLS-1 cycles.
module tb_fm_pe_array;
  import fp_ref_pkg::*;

  localparam int ROWS = 8, COLS = 16, TAG_W = 8, LAT = ROWS + COLS - 1, N = 60;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic             w_shift, in_valid, fuse_sel, out_valid;
  logic [TAG_W-1:0] in_tag, out_tag;
  logic [31:0]      w_row_in [ROWS], x_vec [ROWS];
  logic [31:0]      top_local [COLS], top_fuse [COLS], out_vec [COLS];
  logic [31:0]      W [ROWS][COLS];
  logic [31:0]      exp_v [N][COLS];
  int               t_in [N];
  int               cyc = 0, nout = 0, nfuse = 0;
  int               checks = 0, failures = 0;

  fm_pe_array #(.ROWS(ROWS), .COLS(COLS), .TAG_W(TAG_W)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output checker
  always @(negedge clk) if (rst_n && out_valid) begin
    checks++;
    if (int'(out_tag) != nout) begin
      failures++; $display("FAIL tag %0d expected %0d", out_tag, nout);
    end
    checks++;
    if (cyc - t_in[nout] != LAT) begin
      failures++; $display("FAIL latency %0d", cyc - t_in[nout]);
    end
    for (int c = 0; c < COLS; c++) begin
      checks++;
      if (out_vec[c] !== exp_v[nout][c]) begin
        failures++;
        $display("FAIL vec %0d col %0d got %h exp %h", nout, c, out_vec[c], exp_v[nout][c]);
      end
    end
    nout++;
  end

  initial begin
    logic [31:0] acc;
    w_shift = 0; in_valid = 0; fuse_sel = 0; in_tag = '0;
    w_row_in = '{default: 0}; x_vec = '{default: 0};
    top_local = '{default: 0}; top_fuse = '{default: 0};
    foreach (W[r, c]) W[r][c] = rand_fp(4);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // weight load: value given at shift j ends in column COLS-1-j
    for (int j = 0; j < COLS; j++) begin
      @(negedge clk);
      w_shift = 1;
      for (int r = 0; r < ROWS; r++) w_row_in[r] = W[r][COLS-1-j];
    end
    @(negedge clk); w_shift = 0;
    for (int i = 0; i < N; i++) begin
      in_valid = 1; in_tag = TAG_W'(i);
      fuse_sel = 1'($urandom);
      if (fuse_sel) nfuse++;
      for (int r = 0; r < ROWS; r++) x_vec[r] = rand_fp(4);
      for (int c = 0; c < COLS; c++) begin
        top_local[c] = (i % 5 == 0) ? 32'h0 : rand_fp(4);
        top_fuse[c]  = rand_fp(4);
        acc = fuse_sel ? top_fuse[c] : top_local[c];
        for (int r = 0; r < ROWS; r++) acc = ref_add(acc, ref_mul(x_vec[r], W[r][c]));
        exp_v[i][c] = acc;
      end
      t_in[i] = cyc;
      @(negedge clk);
    end
    in_valid = 0;
    repeat (LAT + 5) @(negedge clk);
    checks++;
    if (nout != N) begin failures++; $display("FAIL got %0d outputs", nout); end
    checks++;
    if (nfuse == 0 || nfuse == N) begin failures++; $display("FAIL select not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
