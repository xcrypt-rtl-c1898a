// tb_xcrypt_io: self-checking test of the host interface with two simple
// tile stand-ins in the testbench. It checks address decoding of IR writes
// (tile, polynomial, index, data), OR reads (slot, index, data returned one
// clock later), command writes, the back-pressure on a command to a busy tile,
// and the status word (busy bit and count of finished commands).
module tb_xcrypt_io;
  import xcrypt_pkg::*;
  localparam int unsigned NC = 256, P = 3, NSLOT = 4, EMAX = 13, AW = 16;
  localparam int unsigned NW = $clog2(NC);

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic req_valid = 1'b0, req_ready, req_we = 1'b0, rsp_valid;
  logic [AW-1:0] req_addr = '0;
  logic [31:0] req_wdata = '0, rsp_rdata;
  logic [1:0] ir_wr, or_rd, cmd_valid;
  logic [1:0] cmd_ready = 2'b11, busy = 2'b00, done = 2'b00;
  logic [$clog2(P)-1:0] ir_poly;
  logic [NW-1:0] ir_idx, or_idx;
  logic [EMAX-1:0] ir_coef;
  logic [$clog2(NSLOT)-1:0] or_slot;
  logic [1:0][EMAX-1:0] or_data;
  tile_cmd_t cmd;

  xcrypt_io #(.NC(NC), .P(P), .NSLOT(NSLOT), .EMAX(EMAX), .AW(AW)) dut (.*);

  // Tile stand-ins: OR data is a function of the registered read address.
  always_ff @(posedge clk)
    for (int t = 0; t < 2; t++)
      if (or_rd[t]) or_data[t] <= EMAX'(t * 4096 + int'(or_slot) * 256 + int'(or_idx));

  int checks = 0, failures = 0;
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
    // IR writes
    for (int n = 0; n < 50; n++) begin
      int t, p, j, d;
      t = $urandom_range(0, 1); p = $urandom_range(0, P - 1); j = $urandom_range(0, NC - 1);
      d = $urandom_range(0, 8191);
      @(negedge clk);
      req_valid = 1'b1; req_we = 1'b1; req_addr = {t[0], REG_IR, 13'(p * NC + j)}; req_wdata = d;
      #0.5;
      check(req_ready, "IR write not accepted");
      check(ir_wr == (2'b01 << t) && int'(ir_poly) == p && int'(ir_idx) == j && int'(ir_coef) == d,
            $sformatf("IR write decode t%0d p%0d j%0d", t, p, j));
      check(or_rd == 0 && cmd_valid == 0, "IR write leaked to other ports");
    end
    // OR reads
    for (int n = 0; n < 50; n++) begin
      int t, s, j;
      t = $urandom_range(0, 1); s = $urandom_range(0, NSLOT - 1); j = $urandom_range(0, NC - 1);
      @(negedge clk);
      req_valid = 1'b1; req_we = 1'b0; req_addr = {t[0], REG_OR, 13'(s * NC + j)};
      @(negedge clk);
      req_valid = 1'b0;
      check(rsp_valid && int'(rsp_rdata) == (t * 4096 + s * 256 + j) % 8192,
            $sformatf("OR read t%0d s%0d j%0d got %0h", t, s, j, rsp_rdata));
    end
    // Commands, back-pressure and status
    for (int t = 0; t < 2; t++) begin
      tile_cmd_t c;
      int waited;
      c.op = CMD_COMPUTE; c.ebits = EW'(EP); c.slot = 2'(t + 1);
      cmd_ready[t] = 1'b0; busy[t] = 1'b1;
      @(negedge clk);
      req_valid = 1'b1; req_we = 1'b1; req_addr = {t[0], REG_CTRL, 13'd0};
      req_wdata = 32'($bits(tile_cmd_t)'(c));
      waited = 0;
      repeat (5) begin
        #0.5;
        check(!req_ready && cmd_valid == 0, "command to a busy tile was not held off");
        waited++;
        @(negedge clk);
      end
      cmd_ready[t] = 1'b1; busy[t] = 1'b0;
      #0.5;
      check(req_ready && cmd_valid == (2'b01 << t) && cmd == c, "command not delivered");
      @(negedge clk);
      req_valid = 1'b0;
      repeat (3) begin done[t] = 1'b1; @(negedge clk); done[t] = 1'b0; @(negedge clk); end
      busy[t] = 1'b1;
      req_valid = 1'b1; req_we = 1'b0; req_addr = {t[0], REG_CTRL, 13'd0};
      @(negedge clk);
      req_valid = 1'b0;
      check(rsp_valid && rsp_rdata == {1'b1, 15'b0, 16'd3}, $sformatf("status t%0d %0h", t, rsp_rdata));
      busy[t] = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
