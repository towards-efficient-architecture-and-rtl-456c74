// tb_fm_weight_buf: writes random words, reads them back in random order and
// checks data and the one-cycle read latency; also checks that the read data
// holds while rd_en is low.
module tb_fm_weight_buf;
  localparam int ROWS = 8, DEPTH = 64, AW = $clog2(DEPTH);
  logic          clk = 0;
  logic          hw_en, rd_en;
  logic [AW-1:0] hw_addr, rd_addr;
  logic [31:0]   hw_data [ROWS], rd_data [ROWS];
  logic [31:0]   model [DEPTH][ROWS];
  int            checks = 0, failures = 0;

  fm_weight_buf #(.ROWS(ROWS), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    hw_en = 0; rd_en = 0; hw_addr = 0; rd_addr = 0; hw_data = '{default: 0};
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      hw_en = 1; hw_addr = AW'(i);
      for (int r = 0; r < ROWS; r++) begin hw_data[r] = $urandom; model[i][r] = hw_data[r]; end
      @(negedge clk);
    end
    hw_en = 0;
    for (int i = 0; i < 200; i++) begin
      a = $urandom_range(0, DEPTH - 1);
      rd_en = 1; rd_addr = AW'(a);
      @(negedge clk);
      rd_en = 0; rd_addr = AW'(a + 1);
      for (int r = 0; r < ROWS; r++) begin
        checks++;
        if (rd_data[r] !== model[a][r]) begin failures++; $display("FAIL %0d/%0d", a, r); end
      end
      @(negedge clk);
      checks++;
      if (rd_data[0] !== model[a][0]) begin failures++; $display("FAIL hold %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
