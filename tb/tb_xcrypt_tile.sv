// tb_xcrypt_tile: self-checking test of one tile at reduced size (degree 64,
// 32x32 crossbars, 2-clock cell writes). It loads three secrets through the
// input register, programs them, then runs several 10-bit vector-vector
// passes into different output-register slots and reads every coefficient
// back, comparing with sum_p a_p * s_p in Z_1024[x]/(x^64 + 1) computed here.
// It checks that a command is refused while the tile is busy, and the
// COMPUTE latency of 8 clocks per bit-plane plus 5 (counted here from the
// clock that presents the command, hence one more).
module tb_xcrypt_tile;
  import xcrypt_pkg::*;
  localparam int unsigned NC = 64, XBS = 32, P = 3, EMAX = 13, NSLOT = 4, WLAT = 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic ir_wr = 1'b0, or_rd = 1'b0, cmd_valid = 1'b0, cmd_ready, busy, done;
  logic [$clog2(P)-1:0] ir_poly = '0;
  logic [$clog2(NC)-1:0] ir_idx = '0, or_idx = '0;
  logic [EMAX-1:0] ir_coef = '0, or_data;
  logic [$clog2(NSLOT)-1:0] or_slot = '0;
  tile_cmd_t cmd = '0;

  xcrypt_tile #(.NC(NC), .XBS(XBS), .P(P), .EMAX(EMAX), .NSLOT(NSLOT), .WLAT(WLAT)) dut (.*);

  int checks = 0, failures = 0, refused = 0;
  int sec [P][NC];
  int a [P][NC];
  int expv [NSLOT][NC];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic ir_write(input int p, input int j, input int v);
    @(negedge clk);
    ir_wr = 1'b1; ir_poly = p[$clog2(P)-1:0]; ir_idx = j[$clog2(NC)-1:0]; ir_coef = EMAX'(v);
    @(negedge clk);
    ir_wr = 1'b0;
  endtask

  // Issue a command and return the clocks until done.
  task automatic command(input cmd_e op, input int e, input int slot, output int t);
    @(negedge clk);
    cmd_valid = 1'b1; cmd.op = op; cmd.ebits = EW'(e); cmd.slot = 2'(slot);
    @(negedge clk);
    cmd_valid = 1'b0;
    t = 1;
    // A second command while busy must not be taken.
    cmd_valid = 1'b1; cmd.op = CMD_NOP;
    if (!cmd_ready) refused++;
    @(negedge clk);
    cmd_valid = 1'b0;
    t++;
    while (!done) begin @(negedge clk); t++; end
  endtask

  initial begin
    int t;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < P; p++)
      for (int j = 0; j < NC; j++) begin
        sec[p][j] = $countones(4'($urandom)) - $countones(4'($urandom));
        ir_write(p, j, sec[p][j] & 15);
      end
    command(CMD_PROGRAM, 0, 0, t);
    check(t >= XBS * (WLAT + 2), $sformatf("programming finished after only %0d clocks", t));
    for (int pass = 0; pass < NSLOT; pass++) begin
      for (int p = 0; p < P; p++)
        for (int j = 0; j < NC; j++) begin
          a[p][j] = $urandom_range(0, 1023);
          ir_write(p, j, a[p][j]);
        end
      for (int j = 0; j < NC; j++) begin
        longint v;
        v = 0;
        for (int p = 0; p < P; p++)
          for (int i = 0; i < NC; i++)
            v += (j >= i) ? longint'(a[p][i]) * sec[p][j - i] : -longint'(a[p][i]) * sec[p][j - i + NC];
        v %= 1024; if (v < 0) v += 1024;
        expv[pass][j] = int'(v);
      end
      command(CMD_COMPUTE, EP, pass, t);
      check(t == 8 * EP + 6, $sformatf("compute took %0d clocks", t));
    end
    for (int s = 0; s < NSLOT; s++)
      for (int j = 0; j < NC; j++) begin
        @(negedge clk);
        or_rd = 1'b1; or_slot = 2'(s); or_idx = j[$clog2(NC)-1:0];
        @(negedge clk);
        or_rd = 1'b0;
        check(int'(or_data) == expv[s][j], $sformatf("slot %0d coeff %0d: %0d exp %0d", s, j, or_data, expv[s][j]));
      end
    check(refused == NSLOT + 1, $sformatf("busy tile accepted commands (%0d refused)", refused));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
