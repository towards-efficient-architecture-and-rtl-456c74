// tb_fm_pe: checks the PE's multiply-accumulate against a double-precision
// reference rounded to single, its one-cycle latency, the pass-through of
// the input value and the weight shift.
module tb_fm_pe;
  import fp_ref_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        w_shift;
  logic [31:0] w_in, w_out, x_in, x_out, psum_in, psum_out;
  int          checks = 0, failures = 0;

  fm_pe dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input logic [31:0] got, input logic [31:0] exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    logic [31:0] w, x, p, e;
    w_shift = 1'b0; w_in = '0; x_in = '0; psum_in = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 40; k++) begin
      // load a new weight
      w = rand_fp(10);
      @(negedge clk); w_shift = 1'b1; w_in = w;
      @(negedge clk); w_shift = 1'b0; w_in = rand_fp(10);
      check(w_out, w, "weight load");
      for (int i = 0; i < 50; i++) begin
        x = rand_fp(12);
        p = (i % 7 == 0) ? 32'h0 : rand_fp(12);
        if (i % 11 == 5) p = {~x[31], x[30:0]}; // cancellation cases
        x_in = x; psum_in = p;
        e = ref_add(p, ref_mul(x, w));
        @(negedge clk);
        check(psum_out, e, "mac");
        check(x_out, x, "x pass");
        check(w_out, w, "weight hold");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
