// tb_fm_ifmap_buf: fills the input buffer through the host port, overwrites
// part of it through the write-back ports, and checks every read (one cycle
// read latency) against a model array.
module tb_fm_ifmap_buf;
  localparam int ROWS = 8, COLS = 16, DEPTH = 64, AW = $clog2(DEPTH), NWB = 2;
  logic          clk = 0;
  logic          hw_en, rd_en;
  logic [AW-1:0] hw_addr, rd_addr;
  logic [31:0]   hw_data [ROWS], rd_data [ROWS];
  logic          wb_en   [NWB];
  logic [AW-1:0] wb_addr [NWB];
  logic [31:0]   wb_data [NWB][ROWS];
  logic [31:0]   model [DEPTH][ROWS];
  int            checks = 0, failures = 0;

  fm_ifmap_buf #(.ROWS(ROWS), .COLS(COLS), .DEPTH(DEPTH)) dut (.*);
  always #5 clk = ~clk;
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd_check(input int a);
    rd_en = 1; rd_addr = AW'(a);
    @(negedge clk); rd_en = 0;
    for (int r = 0; r < ROWS; r++) begin
      checks++;
      if (rd_data[r] !== model[a][r]) begin
        failures++; $display("FAIL addr %0d lane %0d got %h exp %h", a, r, rd_data[r], model[a][r]);
      end
    end
  endtask

  initial begin
    hw_en = 0; rd_en = 0; hw_addr = 0; rd_addr = 0; wb_en = '{default: 0};
    wb_addr = '{default: 0}; hw_data = '{default: 0}; wb_data = '{default: '{default: 0}};
    @(negedge clk);
    for (int a = 0; a < DEPTH; a++) begin
      hw_en = 1; hw_addr = AW'(a);
      for (int r = 0; r < ROWS; r++) begin hw_data[r] = $urandom; model[a][r] = hw_data[r]; end
      @(negedge clk);
    end
    hw_en = 0;
    for (int a = 0; a < DEPTH; a++) rd_check(a);
    // write-back of 10 output pixels as two words each, stride 16
    for (int o = 0; o < 10; o++) begin
      for (int k = 0; k < NWB; k++) begin
        wb_en[k] = 1; wb_addr[k] = AW'(20 + k * 16 + o);
        for (int r = 0; r < ROWS; r++) begin wb_data[k][r] = $urandom; model[20 + k * 16 + o][r] = wb_data[k][r]; end
      end
      @(negedge clk);
    end
    wb_en = '{default: 0};
    for (int a = 0; a < DEPTH; a++) rd_check(a);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
