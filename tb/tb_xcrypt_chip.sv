// tb_xcrypt_chip: end-to-end test of the accelerator at its full size
// (degree 256, 128x128 crossbars, 25-clock cell writes), driven only through
// the host bus.
//
// Decryption (server): the secret s (3 polynomials, coefficients -4..4) is
// programmed once into the decryption tile; then for two ciphertexts the
// 10-bit vector b' is loaded and v = <b', s> mod 2^10 is computed and read
// back.
// Encryption (client): a fresh s' is programmed into the encryption tile; the
// three rows of a 13-bit matrix A are streamed in three 13-bit passes
// (A*s' mod 2^13) and a 10-bit vector b in one 10-bit pass (<b, s'> mod 2^10).
//
// Every coefficient is compared with a schoolbook negacyclic reference
// computed here. The test also measures the decryption pass (about 80 clocks,
// 80 ns at 1 GHz) and the whole encryption (programming plus four passes,
// about 3.8 us), and counts how often each mechanism happened: commands held
// off while a tile was busy, clocks in which the ADC pair swapped its inputs,
// reduced-precision and skipped ADC conversions in
// the decryption tile, 13-bit and 10-bit passes, and crossbar programming.
module tb_xcrypt_chip;
  import xcrypt_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic req_valid = 1'b0, req_ready, req_we = 1'b0, rsp_valid;
  logic [15:0] req_addr = '0;
  logic [31:0] req_wdata = '0, rsp_rdata;
  logic [1:0] tile_busy;

  xcrypt_chip dut (.*);

  localparam int ENC = 0, DEC = 1;
  int checks = 0, failures = 0;
  int stalls = 0, swaps = 0, lo_reduced = 0, skipped = 0, pass13 = 0, pass10 = 0, programs = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Mechanism counters, observed inside the chip.
  int busy_clocks [2] = '{0, 0};
  always @(posedge clk) if (rst_n) begin
    for (int k = 0; k < 2; k++) if (tile_busy[k]) busy_clocks[k]++;
    if (req_valid && !req_ready) stalls++;
    if (dut.g_tile[1].u_tile.g_pm[0].u_pm.conv) begin
      int lo_need;
      lo_need = dut.g_tile[1].u_tile.g_pm[0].u_pm.swap ? int'(dut.g_tile[1].u_tile.g_pm[0].u_pm.need0)
                                                        : int'(dut.g_tile[1].u_tile.g_pm[0].u_pm.need1);
      if (lo_need > 0 && lo_need < int'(ADC_BITS)) lo_reduced++;
      if (dut.g_tile[1].u_tile.g_pm[0].u_pm.need0 == 0) skipped++;
      if (dut.g_tile[1].u_tile.g_pm[0].u_pm.swap) swaps++;
    end
  end

  // ---------------------------------------------------------------- bus
  task automatic bus_write(input int tile, input region_e reg_r, input int offset, input int data);
    @(negedge clk);
    req_valid = 1'b1; req_we = 1'b1;
    req_addr = {tile[0], reg_r, 13'(offset)};
    req_wdata = data;
    @(posedge clk);
    while (!req_ready) @(posedge clk);
    @(negedge clk);
    req_valid = 1'b0; req_we = 1'b0;
  endtask

  task automatic bus_read(input int tile, input region_e reg_r, input int offset, output int data);
    @(negedge clk);
    req_valid = 1'b1; req_we = 1'b0;
    req_addr = {tile[0], reg_r, 13'(offset)};
    @(negedge clk);
    req_valid = 1'b0;
    check(rsp_valid, "no read response");
    data = int'(rsp_rdata);
  endtask

  // Send a command and wait for it to finish; returns the clocks the tile was busy.
  task automatic run_cmd(input int tile, input cmd_e op, input int e, input int slot, output int t);
    tile_cmd_t c;
    int st, n0, b0;
    b0 = busy_clocks[tile];
    c.op = op; c.ebits = EW'(e); c.slot = 2'(slot);
    bus_read(tile, REG_CTRL, 0, st);
    n0 = st & 32'h0000_ffff;
    bus_write(tile, REG_CTRL, 0, 32'($bits(tile_cmd_t)'(c)));
    // A second command while busy is held off by the interface (back-pressure).
    if (op == CMD_COMPUTE) begin
      @(negedge clk);
      req_valid = 1'b1; req_we = 1'b1; req_addr = {tile[0], REG_CTRL, 13'd0};
      req_wdata = 32'($bits(tile_cmd_t)'(tile_cmd_t'{op: CMD_NOP, ebits: '0, slot: '0}));
      @(posedge clk);
      while (!req_ready) @(posedge clk);
      @(negedge clk);
      req_valid = 1'b0; req_we = 1'b0;
      n0++;   // the NOP also counts as a finished command
    end
    do begin
      bus_read(tile, REG_CTRL, 0, st);
    end while ((st & 32'h0000_ffff) <= n0 || st[31]);
    t = busy_clocks[tile] - b0;
    if (op == CMD_PROGRAM) programs++;
    if (op == CMD_COMPUTE && e == EQ) pass13++;
    if (op == CMD_COMPUTE && e == EP) pass10++;
  endtask

  // ---------------------------------------------------------------- reference
  function automatic int negamul_acc(input int a [L][N], input int s [L][N], input int j, input int e);
    longint v;
    v = 0;
    for (int p = 0; p < L; p++)
      for (int i = 0; i < N; i++)
        v += (j >= i) ? longint'(a[p][i]) * s[p][j - i] : -longint'(a[p][i]) * s[p][j - i + N];
    v %= (longint'(1) << e);
    if (v < 0) v += (longint'(1) << e);
    return int'(v);
  endfunction

  task automatic load_secret(input int tile, output int s [L][N]);
    for (int p = 0; p < L; p++)
      for (int j = 0; j < N; j++) begin
        s[p][j] = $countones(4'($urandom)) - $countones(4'($urandom));
        bus_write(tile, REG_IR, p * N + j, s[p][j] & 15);
      end
  endtask

  task automatic load_input(input int tile, input int e, output int a [L][N]);
    for (int p = 0; p < L; p++)
      for (int j = 0; j < N; j++) begin
        a[p][j] = $urandom_range(0, (1 << e) - 1);
        bus_write(tile, REG_IR, p * N + j, a[p][j]);
      end
  endtask

  task automatic check_result(input int tile, input int slot, input int a [L][N], input int s [L][N],
                              input int e, input string what);
    int errs, d;
    errs = 0;
    for (int j = 0; j < N; j++) begin
      bus_read(tile, REG_OR, slot * N + j, d);
      checks++;
      if (d != negamul_acc(a, s, j, e)) begin
        errs++; failures++;
        if (errs < 5) $display("FAIL: %s coeff %0d: %0d exp %0d", what, j, d, negamul_acc(a, s, j, e));
      end
    end
  endtask

  int s_dec [L][N];
  int s_enc [L][N];
  int a_in [L][N];
  int t;
  longint t_enc0;

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;

    // ---------------- decryption tile: program once, decrypt twice
    load_secret(DEC, s_dec);
    run_cmd(DEC, CMD_PROGRAM, 0, 0, t);
    for (int c = 0; c < 2; c++) begin
      int t_dec;
      load_input(DEC, EP, a_in);
      run_cmd(DEC, CMD_COMPUTE, EP, c, t_dec);
      check(t_dec == 8 * EP + 5, $sformatf("decryption pass took %0d clocks", t_dec));
      check_result(DEC, c, a_in, s_dec, EP, "decrypt v");
    end

    // ---------------- encryption tile: program s', A*s' (3 x 13 bits), b*s' (10 bits)
    load_secret(ENC, s_enc);
    t_enc0 = $time;
    run_cmd(ENC, CMD_PROGRAM, 0, 0, t);
    begin
      int prog_clocks;
      prog_clocks = int'(($time - t_enc0) / 2);
      check(prog_clocks >= 128 * (WRITE_LAT + 2) && prog_clocks < 128 * (WRITE_LAT + 2) + 40,
            $sformatf("programming took %0d clocks", prog_clocks));
      $display("encryption-tile programming: %0d clocks", prog_clocks);
    end
    for (int row = 0; row < L; row++) begin
      int t13;
      load_input(ENC, EQ, a_in);
      run_cmd(ENC, CMD_COMPUTE, EQ, row, t13);
      check(t13 == 8 * EQ + 5, $sformatf("13-bit pass took %0d clocks", t13));
      check_result(ENC, row, a_in, s_enc, EQ, $sformatf("A*s' row %0d", row));
    end
    load_input(ENC, EP, a_in);
    run_cmd(ENC, CMD_COMPUTE, EP, 3, t);
    check_result(ENC, 3, a_in, s_enc, EP, "b*s'");

    check(stalls > 0, "no command was ever held off");
    check(lo_reduced > 0, "no reduced-precision ADC conversion");
    check(skipped > 0, "no skipped ADC conversion");
    check(swaps > 0, "the ADC pair never swapped its inputs");
    check(pass13 == 3 && pass10 == 3, "pass counts");
    check(programs == 2, "programming count");
    $display("stalls %0d, ADC swaps %0d, reduced-precision conversions %0d, skipped %0d, 13-bit passes %0d, 10-bit passes %0d, programs %0d",
             stalls, swaps, lo_reduced, skipped, pass13, pass10, programs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
