// tb_input_reg: self-checking test of the input register. Random coefficients
// are written to every polynomial; then random bit-plane requests per
// multiplier and row half are checked bit by bit against the written values,
// and the secret output against their low 4 bits.
module tb_input_reg;
  localparam int unsigned P = 3, NC = 16, XBS = 8, EMAX = 13, SB = 4, EW = 4;
  localparam int unsigned H = NC / XBS;
  logic clk = 1'b0;
  always #1 clk = ~clk;

  logic wr_en = 1'b0;
  logic [$clog2(P)-1:0] wr_poly = '0;
  logic [$clog2(NC)-1:0] wr_idx = '0;
  logic [EMAX-1:0] wr_coef = '0;
  logic [P-1:0][H-1:0][EW-1:0] plane_idx = '0;
  logic [P-1:0][H-1:0][XBS-1:0] plane_bits;
  logic [P-1:0][NC-1:0][SB-1:0] secret;

  input_reg #(.P(P), .NC(NC), .XBS(XBS), .EMAX(EMAX), .SB(SB), .EW(EW)) dut (.*);

  int checks = 0, failures = 0;
  logic [EMAX-1:0] model [P][NC];
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
    for (int p = 0; p < P; p++)
      for (int j = 0; j < NC; j++) begin
        model[p][j] = EMAX'($urandom);
        @(negedge clk);
        wr_en = 1'b1; wr_poly = p[$clog2(P)-1:0]; wr_idx = j[$clog2(NC)-1:0]; wr_coef = model[p][j];
      end
    @(negedge clk);
    wr_en = 1'b0;
    for (int n = 0; n < 100; n++) begin
      for (int p = 0; p < P; p++)
        for (int h = 0; h < H; h++) plane_idx[p][h] = EW'($urandom_range(0, EMAX - 1));
      #0.5;
      for (int p = 0; p < P; p++)
        for (int h = 0; h < H; h++)
          for (int r = 0; r < XBS; r++)
            check(plane_bits[p][h][r] == model[p][h*XBS + r][plane_idx[p][h]],
                  $sformatf("plane p%0d h%0d r%0d", p, h, r));
    end
    for (int p = 0; p < P; p++)
      for (int j = 0; j < NC; j++)
        check(secret[p][j] == model[p][j][SB-1:0], $sformatf("secret p%0d j%0d", p, j));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
