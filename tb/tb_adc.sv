// tb_adc: self-checking test of the variable-precision ADC model. Random
// levels are converted at every precision from 0 to the full resolution; the
// code must be the low `prec` bits of the level, one clock after conv, and must
// hold while conv is low.
module tb_adc;
  localparam int unsigned RES = 6, IN_W = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic conv = 1'b0;
  logic [IN_W-1:0] level = '0;
  logic [3:0] prec = '0;
  logic [RES-1:0] code;

  adc #(.RES(RES), .IN_W(IN_W)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int n = 0; n < 500; n++) begin
      int l, p, exp;
      l = $urandom_range(0, 2**IN_W - 1);
      p = $urandom_range(0, RES);
      exp = l % (2 ** p);
      @(negedge clk);
      conv = 1'b1; level = IN_W'(l); prec = 4'(p);
      @(negedge clk);
      conv = 1'b0; level = IN_W'($urandom);
      check(int'(code) == exp, $sformatf("level %0d prec %0d: code %0d exp %0d", l, p, code, exp));
      @(negedge clk);
      check(int'(code) == exp, "code not held");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
