// tb_output_reg: self-checking test of the output register. Whole random
// result vectors are captured into every slot; random coefficients are then
// read back (data one clock after rd_en) and compared with the testbench copy.
module tb_output_reg;
  localparam int unsigned NSLOT = 4, NC = 16, EMAX = 13;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic wr_en = 1'b0, rd_en = 1'b0;
  logic [$clog2(NSLOT)-1:0] wr_slot = '0, rd_slot = '0;
  logic [NC-1:0][EMAX-1:0] wr_data = '0;
  logic [$clog2(NC)-1:0] rd_idx = '0;
  logic [EMAX-1:0] rd_data;

  output_reg #(.NSLOT(NSLOT), .NC(NC), .EMAX(EMAX)) dut (.*);

  int checks = 0, failures = 0;
  logic [NC-1:0][EMAX-1:0] model [NSLOT];
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
    for (int round = 0; round < 3; round++) begin
      for (int s = 0; s < NSLOT; s++) begin
        for (int j = 0; j < NC; j++) model[s][j] = EMAX'($urandom);
        @(negedge clk);
        wr_en = 1'b1; wr_slot = s[$clog2(NSLOT)-1:0]; wr_data = model[s];
      end
      @(negedge clk);
      wr_en = 1'b0;
      for (int n = 0; n < 64; n++) begin
        int s, j;
        s = $urandom_range(0, NSLOT - 1); j = $urandom_range(0, NC - 1);
        rd_en = 1'b1; rd_slot = s[$clog2(NSLOT)-1:0]; rd_idx = j[$clog2(NC)-1:0];
        @(negedge clk);
        rd_en = 1'b0;
        check(rd_data == model[s][j], $sformatf("slot %0d idx %0d: %0d vs %0d", s, j, rd_data, model[s][j]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
