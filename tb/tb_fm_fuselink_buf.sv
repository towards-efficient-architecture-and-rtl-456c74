// tb_fm_fuselink_buf: writes random COLS-wide vectors while reading others in the
// same cycles and checks every read (one-cycle latency) against a model.
module tb_fm_fuselink_buf;
  localparam int COLS = 16, DEPTH = 32, AW = $clog2(DEPTH);
  logic          clk = 0;
  logic          wr_en, rd_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [31:0]   wr_data [COLS], rd_data [COLS];
  logic [31:0]   model [DEPTH][COLS];
  int            checks = 0, failures = 0;

  fm_fuselink_buf #(.COLS(COLS), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int a;
    wr_en = 0; rd_en = 0; wr_addr = 0; rd_addr = 0; wr_data = '{default: 0};
    @(negedge clk);
    for (int i = 0; i < DEPTH; i++) begin
      wr_en = 1; wr_addr = AW'(i);
      for (int c = 0; c < COLS; c++) begin wr_data[c] = $urandom; model[i][c] = wr_data[c]; end
      @(negedge clk);
    end
    for (int i = 0; i < 300; i++) begin
      // simultaneous write to one address and read of another
      a = $urandom_range(0, DEPTH - 1);
      wr_en = 1; wr_addr = AW'($urandom_range(0, DEPTH - 1));
      if (wr_addr == AW'(a)) wr_addr = wr_addr + 1'b1;
      for (int c = 0; c < COLS; c++) wr_data[c] = $urandom;
      rd_en = 1; rd_addr = AW'(a);
      @(negedge clk);
      for (int c = 0; c < COLS; c++) model[wr_addr][c] = wr_data[c];
      wr_en = 0; rd_en = 0;
      for (int c = 0; c < COLS; c++) begin
        checks++;
        if (rd_data[c] !== model[a][c]) begin failures++; $display("FAIL %0d/%0d", a, c); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
