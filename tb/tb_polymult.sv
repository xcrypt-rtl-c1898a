// tb_polymult: self-checking test of one polynomial multiplier at reduced size
// (degree 64 on 32x32 crossbars, so still two row halves and eight column
// groups). It programs a secret drawn from a centered binomial distribution
// (coefficients -4..4), streams random 10-bit inputs, rebuilds every result
// coefficient from the emitted ADC codes and compares it with a schoolbook
// negacyclic product computed here. It also checks the programming time and
// the pass latency (8 clocks per bit-plane), and that the reduced-precision ADC
// of each pair and the skipped conversions were exercised.
module tb_polymult;
  import xcrypt_pkg::*;
  localparam int unsigned NC = 64, XBS = 32, SB = 4, EMAX = 13, ABITS = 6, ADC_LO = 5, SHARE = 8, WLAT = 2;
  localparam int unsigned H = NC / XBS, CPX = XBS / SB, G = NC / CPX, NADC = XBS / SHARE;
  localparam int unsigned SW = $clog2(SHARE);

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic prog_start = 1'b0, prog_done, start = 1'b0, busy;
  logic [NC-1:0][SB-1:0] prog_secret = '0;
  logic [EW-1:0] ebits = EW'(EP);
  logic [H-1:0][EW-1:0] plane_idx;
  logic [H-1:0][XBS-1:0] plane_bits;
  logic s_valid, s_last;
  logic [SW-1:0] s_slot;
  logic [H-1:0][EW-1:0] s_plane;
  logic [H-1:0][G-1:0][NADC-1:0][ABITS-1:0] s_code;

  polymult #(.NC(NC), .XBS(XBS), .SB(SB), .EMAX(EMAX), .ABITS(ABITS), .ADC_LO(ADC_LO),
             .SHARE(SHARE), .WLAT(WLAT)) dut (.*);

  int checks = 0, failures = 0;
  int sec [NC];
  int a [NC];
  longint rebuilt [NC];
  int lo_reduced = 0, skipped = 0;

  // Input bit-planes come straight from the test vector.
  always_comb
    for (int h = 0; h < H; h++)
      for (int r = 0; r < XBS; r++) plane_bits[h][r] = 1'((a[h*XBS + r] >> plane_idx[h]) & 1);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Rebuild coefficients from the codes (weights +1,+2,+4,-8 per cell column).
  int e_cur = EP;
  always @(posedge clk) if (s_valid) begin
    for (int h = 0; h < H; h++)
      for (int g = 0; g < G; g++)
        for (int i = 0; i < NADC; i++) begin
          int col, j, b, k;
          col = i * SHARE + int'(s_slot);
          j = g * CPX + col / SB;
          b = col % SB;
          k = int'(s_plane[h]) + b;
          if (k < e_cur) begin
            if (b == SB - 1) rebuilt[j] -= longint'(s_code[h][g][i]) << k;
            else             rebuilt[j] += longint'(s_code[h][g][i]) << k;
          end
        end
  end

  // Observe the ADC pair: precision given to the second converter.
  always @(posedge clk) if (rst_n && dut.conv) begin
    int lo_need;
    lo_need = dut.swap ? int'(dut.need0) : int'(dut.need1);
    if (lo_need < int'(ABITS) && lo_need > 0) lo_reduced++;
    if (dut.need0 == 0 || dut.need1 == 0) skipped++;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Latencies are counted in clocks from the edge that takes the request to the
  // edge after which the response is visible, plus one.
  task automatic program_secret();
    int t;
    for (int j = 0; j < NC; j++) begin
      sec[j] = $countones(4'($urandom)) - $countones(4'($urandom));
      prog_secret[j] = SB'(sec[j]);
    end
    @(negedge clk); prog_start = 1'b1;
    @(negedge clk); prog_start = 1'b0;
    t = 1;
    while (!prog_done) begin @(negedge clk); t++; end
    check(t == XBS * (WLAT + 2) + 1, $sformatf("programming took %0d clocks", t));
  endtask

  task automatic run_pass(input int e);
    int t;
    e_cur = e;
    for (int j = 0; j < NC; j++) begin a[j] = $urandom_range(0, 2**e - 1); rebuilt[j] = 0; end
    @(negedge clk); start = 1'b1; ebits = EW'(e);
    @(negedge clk); start = 1'b0;
    t = 1;
    while (!s_last) begin @(negedge clk); t++; end
    check(t == SHARE * e + 2, $sformatf("pass latency %0d clocks", t));
    @(negedge clk);
    for (int j = 0; j < NC; j++) begin
      longint ref_v, m;
      ref_v = 0;
      for (int i = 0; i < NC; i++) begin
        if (j >= i) ref_v += longint'(a[i]) * sec[j - i];
        else        ref_v -= longint'(a[i]) * sec[j - i + NC];
      end
      ref_v = ref_v % (longint'(1) << e); if (ref_v < 0) ref_v += longint'(1) << e;
      m = rebuilt[j] % (longint'(1) << e); if (m < 0) m += longint'(1) << e;
      check(m == ref_v, $sformatf("e=%0d coeff %0d: %0d exp %0d", e, j, m, ref_v));
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    program_secret();
    repeat (3) run_pass(EP);
    program_secret();
    repeat (2) run_pass(EP);
    check(lo_reduced > 0, "second ADC of a pair never ran at reduced precision");
    check(skipped > 0, "no conversion was ever skipped");
    $display("reduced-precision conversions %0d, skipped %0d", lo_reduced, skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
