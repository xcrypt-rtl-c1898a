// tb_shift_add: self-checking test of the shift-and-add unit. Random ADC code
// sets with random slot and bit-plane tags are fed for several passes with
// 10-bit and 13-bit moduli. The testbench keeps its own result per output
// coefficient, walking coefficient by coefficient over its 4 cell columns
// (weights +1, +2, +4 and -8 for the two's complement secret) and adding
// code * weight * 2^plane modulo 2^e.
module tb_shift_add;
  import xcrypt_pkg::*;
  localparam int unsigned P = 3, NC = 64, XBS = 32, SB = 4, EMAX = 13, ABITS = 6, SHARE = 8;
  localparam int unsigned H = NC / XBS, CPX = XBS / SB, G = NC / CPX, NADC = XBS / SHARE;
  localparam int unsigned SW = $clog2(SHARE);

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic clear = 1'b0, in_valid = 1'b0;
  logic [EW-1:0] ebits = '0;
  logic [SW-1:0] slot = '0;
  logic [H-1:0][EW-1:0] plane = '0;
  logic [P-1:0][H-1:0][G-1:0][NADC-1:0][ABITS-1:0] codes = '0;
  logic [NC-1:0][EMAX-1:0] acc;

  shift_add #(.P(P), .NC(NC), .XBS(XBS), .SB(SB), .EMAX(EMAX), .ABITS(ABITS), .SHARE(SHARE)) dut (.*);

  int checks = 0, failures = 0;
  longint model [NC];
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
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int pass = 0; pass < 6; pass++) begin
      int e;
      e = (pass % 2 == 0) ? EP : EQ;
      @(negedge clk);
      clear = 1'b1; ebits = EW'(e);
      @(negedge clk);
      clear = 1'b0;
      for (int j = 0; j < NC; j++) model[j] = 0;
      for (int n = 0; n < 60; n++) begin
        for (int p = 0; p < P; p++)
          for (int h = 0; h < H; h++)
            for (int g = 0; g < G; g++)
              for (int i = 0; i < NADC; i++) codes[p][h][g][i] = ABITS'($urandom);
        slot = SW'($urandom);
        for (int h = 0; h < H; h++) plane[h] = EW'($urandom_range(0, e - 1));
        in_valid = ($urandom_range(0, 3) != 0);
        if (in_valid)
          for (int j = 0; j < NC; j++)
            for (int b = 0; b < SB; b++) begin
              int col, g, i;
              g = j / CPX;
              col = (j % CPX) * SB + b;
              if (col % SHARE != int'(slot)) continue;
              i = col / SHARE;
              for (int h = 0; h < H; h++)
                if (int'(plane[h]) + b < e)
                  for (int p = 0; p < P; p++) begin
                    longint w;
                    w = (b == SB - 1) ? -(longint'(1) << (SB - 1)) : (longint'(1) << b);
                    model[j] += longint'(codes[p][h][g][i]) * w * (longint'(1) << plane[h]);
                  end
            end
        @(negedge clk);
      end
      in_valid = 1'b0;
      for (int j = 0; j < NC; j++) begin
        longint m;
        m = model[j] % (longint'(1) << e);
        if (m < 0) m += (longint'(1) << e);
        check(longint'(acc[j]) == m, $sformatf("pass %0d coeff %0d: %0d exp %0d", pass, j, acc[j], m));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
