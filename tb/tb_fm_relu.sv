// tb_fm_relu: random positive, negative and zero values with the unit
// enabled and bypassed, checked against the sign rule.
module tb_fm_relu;
  localparam int N = 16;
  logic        en;
  logic [31:0] in_vec [N], out_vec [N];
  int          checks = 0, failures = 0;

  fm_relu #(.N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] e;
    for (int t = 0; t < 200; t++) begin
      en = 1'(t % 3 != 0);
      for (int i = 0; i < N; i++) begin
        in_vec[i] = $urandom;
        if (i == 0) in_vec[i] = 32'h8000_0000;
        if (i == 1) in_vec[i] = 32'h0;
      end
      #1;
      for (int i = 0; i < N; i++) begin
        e = (en && in_vec[i][31]) ? 32'h0 : in_vec[i];
        checks++;
        if (out_vec[i] !== e) begin failures++; $display("FAIL %h -> %h", in_vec[i], out_vec[i]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
