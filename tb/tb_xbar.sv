// tb_xbar: self-checking test of the crossbar model. It programs every row
// with random bits (checking the write latency), then applies random input
// vectors and compares each held bitline level with a popcount of
// (input AND column) computed from the testbench's own copy of the array.
module tb_xbar;
  localparam int unsigned ROWS = 16, COLS = 12, WL = 3;
  localparam int unsigned LW = $clog2(ROWS + 1);

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic wr_en = 1'b0, wr_busy, rd_en = 1'b0;
  logic [$clog2(ROWS)-1:0] wr_row = '0;
  logic [COLS-1:0] wr_data = '0;
  logic [ROWS-1:0] rd_in = '0;
  logic [COLS-1:0][LW-1:0] bl;

  xbar #(.ROWS(ROWS), .COLS(COLS), .WRITE_LAT(WL)) dut (.*);

  int checks = 0, failures = 0;
  logic [COLS-1:0] model [ROWS];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int busy_cycles;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int r = 0; r < ROWS; r++) begin
      model[r] = COLS'($urandom);
      wr_en <= 1'b1; wr_row <= r[$clog2(ROWS)-1:0]; wr_data <= model[r];
      @(posedge clk);
      wr_en <= 1'b0;
      busy_cycles = 0;
      @(negedge clk);
      while (wr_busy) begin busy_cycles++; @(negedge clk); end
      check(busy_cycles == WL, $sformatf("row %0d write took %0d clocks", r, busy_cycles));
    end
    for (int n = 0; n < 200; n++) begin
      logic [ROWS-1:0] x;
      x = ROWS'($urandom);
      @(negedge clk);
      rd_en = 1'b1; rd_in = x;
      @(negedge clk);
      rd_en = 1'b0; rd_in = ROWS'($urandom);   // held value must not follow the inputs
      @(negedge clk);
      for (int c = 0; c < COLS; c++) begin
        int exp;
        exp = 0;
        for (int r = 0; r < ROWS; r++) exp += (x[r] && model[r][c]) ? 1 : 0;
        check(int'(bl[c]) == exp, $sformatf("read %0d col %0d: got %0d exp %0d", n, c, bl[c], exp));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
