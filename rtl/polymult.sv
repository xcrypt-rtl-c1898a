// polymult: one polynomial multiplier (PM) of an XCRYPT tile. It multiplies a
// streamed input polynomial a (coefficients of up to EMAX bits) by a secret
// polynomial s (SBITS-bit two's complement coefficients) in Z[x]/(x^N + 1).
//
// Mapping. The negacyclic product c = a*s is the vector-matrix product a * M
// with M[i][j] = s[j-i] for j >= i and -s[j-i+N] otherwise: every matrix row is
// the row above shifted by one coefficient, with the coefficient that wraps
// around negated. Row i of M is stored in crossbar row i; each secret
// coefficient takes SBITS adjacent 1-bit cells, LSB in the lowest column. With
// N = 256, 4-bit secrets and 128x128 crossbars this is H = 2 row halves (input
// coefficients 0..127 and 128..255) times G = 8 column groups (32 output
// coefficients each): 16 crossbars.
//
// Programming (prog_start). The secret is loaded into one shift register per
// row half, preset to that half's first matrix row; after each row write the
// registers rotate by one coefficient with negation of the wrapped one. The
// 16 crossbars write one row each in parallel, so programming takes
// XB * (WRITE_LAT + 2) clocks (one issue clock and one turnaround clock per row).
//
// Computation (start). The input is applied one bit-plane per crossbar read
// (1-bit DACs), EBITS reads in all. Every bitline is held in S&H and converted
// by ADCs shared by ADC_SHARE bitlines, one conversion per clock, so a read
// step takes ADC_SHARE clocks and a pass about ADC_SHARE*EBITS clocks
// (80 ns for a 10-bit pass at 1 GHz).
//
// ADC sharing with staggered order (ADCShare). The two row halves of a column
// group feed the same output coefficients. Half 0 reads bit-planes
// 0,1,...,E-1 while half 1 reads them starting at plane ceil(E/2) and wrapping.
// A sample of bit-plane t and cell column b has weight 2^(t+b), so it needs
// only min(ADC_BITS, E-t-b) bits. Thanks to the stagger the two samples that
// share an ADC pair never both need the highest precision when E = 10, so each
// pair is one ADC_BITS converter and one ADC_LO converter; the sample of the
// lower bit-plane goes to the full-precision one. For E = 13 both samples may
// need 6 bits, so a tile that runs 13-bit passes sets ADC_LO = ADC_BITS.
//
// Outputs: every clock after a conversion, s_code holds one code per half,
// column group and ADC pair, with s_slot (bitline within the ADC's group) and
// s_plane (bit-plane per half) telling the shift-and-add unit its weight.
//
// What follows the design description: the negacyclic mapping, 1-bit cells and
// DACs, 4 cells per secret coefficient, 8 bitlines per ADC, the 6/5-bit shared
// ADC pair and the stagger by half the passes. This implementation's own
// choices: the shift-register row generator, the two's complement sign column,
// and the exact cycle timeline.
module polymult
  import xcrypt_pkg::*;
#(
  parameter int unsigned NC        = 256,   // polynomial degree
  parameter int unsigned XBS       = 128,   // crossbar size
  parameter int unsigned SB        = 4,     // secret bits
  parameter int unsigned EMAX      = 13,    // largest modulus exponent
  parameter int unsigned ABITS     = 6,     // full ADC precision
  parameter int unsigned ADC_LO    = 5,     // precision of the second ADC of a pair
  parameter int unsigned SHARE     = 8,     // bitlines per ADC
  parameter int unsigned WLAT      = 25,    // row write latency in clocks
  localparam int unsigned H    = NC / XBS,        // row halves (2)
  localparam int unsigned CPX  = XBS / SB,        // output coefficients per crossbar
  localparam int unsigned G    = NC / CPX,        // column groups
  localparam int unsigned NADC = XBS / SHARE,     // ADC pairs per column group
  localparam int unsigned SW   = $clog2(SHARE),
  localparam int unsigned LW   = $clog2(XBS + 1)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // programming
  input  logic                               prog_start,
  input  logic [NC-1:0][SB-1:0]              prog_secret,
  output logic                               prog_done,
  // computation
  input  logic                               start,
  input  logic [EW-1:0]                      ebits,
  output logic [H-1:0][EW-1:0]               plane_idx,
  input  logic [H-1:0][XBS-1:0]              plane_bits,
  output logic                               busy,
  // samples to the shift-and-add unit
  output logic                               s_valid,
  output logic                               s_last,
  output logic [SW-1:0]                      s_slot,
  output logic [H-1:0][EW-1:0]               s_plane,
  output logic [H-1:0][G-1:0][NADC-1:0][ABITS-1:0] s_code
);

  // ---------------------------------------------------------------- crossbars
  logic [H-1:0][G-1:0]                       xb_busy;
  logic [H-1:0][G-1:0][XBS-1:0][LW-1:0]      xb_bl;
  logic                                      wr_en;
  logic [$clog2(XBS)-1:0]                    wr_row;
  logic [H-1:0][NC-1:0][SB-1:0]              rowreg;   // current matrix row per half
  logic                                      rd_en;

  for (genvar h = 0; h < H; h++) begin : g_h
    for (genvar g = 0; g < G; g++) begin : g_g
      xbar #(.ROWS(XBS), .COLS(XBS), .WRITE_LAT(WLAT)) u_xb (
        .clk, .rst_n,
        .wr_en   (wr_en),
        .wr_row  (wr_row),
        .wr_data (rowreg[h][g*CPX +: CPX]),
        .wr_busy (xb_busy[h][g]),
        .rd_en   (rd_en),
        .rd_in   (plane_bits[h]),
        .bl      (xb_bl[h][g])
      );
    end
  end

  // ------------------------------------------------------- programming FSM
  typedef enum logic [1:0] {P_IDLE, P_ISSUE, P_WAIT} pstate_e;
  pstate_e pstate;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pstate    <= P_IDLE;
      wr_row    <= '0;
      rowreg    <= '0;
      prog_done <= 1'b0;
    end else begin
      prog_done <= 1'b0;
      unique case (pstate)
        P_IDLE: if (prog_start) begin
          // Preset half h to matrix row h*XBS.
          for (int h = 0; h < H; h++)
            for (int j = 0; j < NC; j++) begin
              if (j >= h * XBS) rowreg[h][j] <= prog_secret[j - h*XBS];
              else              rowreg[h][j] <= SB'(-prog_secret[j - h*XBS + NC]);
            end
          wr_row <= '0;
          pstate <= P_ISSUE;
        end
        P_ISSUE: pstate <= P_WAIT;
        P_WAIT: if (xb_busy == '0) begin
          // Row written: rotate every half by one coefficient (negacyclic).
          for (int h = 0; h < H; h++) begin
            rowreg[h][0] <= SB'(-rowreg[h][NC-1]);
            for (int j = 1; j < NC; j++) rowreg[h][j] <= rowreg[h][j-1];
          end
          if (wr_row == ($clog2(XBS))'(XBS - 1)) begin
            pstate    <= P_IDLE;
            prog_done <= 1'b1;
          end else begin
            wr_row <= wr_row + 1'b1;
            pstate <= P_ISSUE;
          end
        end
        default: pstate <= P_IDLE;
      endcase
    end
  end

  assign wr_en = (pstate == P_ISSUE);

  // ------------------------------------------------------- computation FSM
  localparam int unsigned CW = $clog2(SHARE * EMAX + 2);
  logic          run;
  logic [CW-1:0] cyc;
  logic [EW-1:0] e_q;

  // Bit-plane read by half h at read step t (staggered for half 1).
  function automatic logic [EW-1:0] plane_of(input int unsigned h, input int unsigned t,
                                             input int unsigned e);
    int unsigned p;
    if (e == 0)      p = 0;
    else if (h == 0) p = t;
    else             p = (t + (e + 1) / 2) % e;
    return EW'(p);
  endfunction

  logic [EW-1:0] rd_step, cv_step;
  logic [SW-1:0] cv_slot;
  logic          conv;

  always_comb begin
    rd_step = EW'(cyc >> SW);
    rd_en   = run && (cyc[SW-1:0] == '0) && (rd_step < e_q);
    cv_step = EW'((cyc - 1'b1) >> SW);
    cv_slot = SW'(cyc - 1'b1);
    conv    = run && (cyc != '0);
    for (int h = 0; h < H; h++) plane_idx[h] = plane_of(h, int'(rd_step), int'(e_q));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run <= 1'b0;
      cyc <= '0;
      e_q <= '0;
    end else if (!run) begin
      if (start && pstate == P_IDLE) begin
        run <= 1'b1;
        cyc <= '0;
        e_q <= ebits;
      end
    end else begin
      if (cyc == CW'(SHARE * int'(e_q))) run <= 1'b0;
      cyc <= cyc + 1'b1;
    end
  end

  assign busy = run || (pstate != P_IDLE);

  // ------------------------------------------------ shared ADC pairs (ADCShare)
  logic [H-1:0][EW-1:0] cv_plane;
  logic                 swap;      // half 1 takes the full-precision ADC
  logic [PW-1:0]        need0, need1;
  always_comb begin
    for (int h = 0; h < H; h++) cv_plane[h] = plane_of(h, int'(cv_step), int'(e_q));
    swap  = cv_plane[1] < cv_plane[0];
    need0 = need_prec(int'(cv_plane[0]) + int'(cv_slot) % SB, int'(e_q), ABITS);
    need1 = need_prec(int'(cv_plane[1]) + int'(cv_slot) % SB, int'(e_q), ABITS);
  end

  logic [G-1:0][NADC-1:0][ABITS-1:0]  hi_code;
  logic [G-1:0][NADC-1:0][ADC_LO-1:0] lo_code;
  for (genvar g = 0; g < G; g++) begin : g_adc_g
    for (genvar i = 0; i < NADC; i++) begin : g_adc_i
      logic [LW-1:0] lvl0, lvl1;
      assign lvl0 = xb_bl[0][g][i*SHARE + int'(cv_slot)];
      assign lvl1 = xb_bl[1][g][i*SHARE + int'(cv_slot)];
      adc #(.RES(ABITS), .IN_W(LW)) u_adc_hi (
        .clk, .rst_n, .conv(conv),
        .level(swap ? lvl1 : lvl0), .prec(swap ? need1 : need0),
        .code(hi_code[g][i])
      );
      adc #(.RES(ADC_LO), .IN_W(LW)) u_adc_lo (
        .clk, .rst_n, .conv(conv),
        .level(swap ? lvl0 : lvl1), .prec(swap ? need0 : need1),
        .code(lo_code[g][i])
      );
    end
  end

  // Sample tags, aligned with the ADC outputs.
  logic swap_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s_valid <= 1'b0;
      s_last  <= 1'b0;
      s_slot  <= '0;
      s_plane <= '0;
      swap_q  <= 1'b0;
    end else begin
      s_valid <= conv;
      s_last  <= conv && (cyc == CW'(SHARE * int'(e_q)));
      s_slot  <= cv_slot;
      s_plane <= cv_plane;
      swap_q  <= swap;
    end
  end

  always_comb begin
    for (int g = 0; g < G; g++)
      for (int i = 0; i < NADC; i++) begin
        s_code[0][g][i] = swap_q ? ABITS'(lo_code[g][i]) : hi_code[g][i];
        s_code[1][g][i] = swap_q ? hi_code[g][i] : ABITS'(lo_code[g][i]);
      end
  end

  // The staggered order must keep the second ADC of a pair within its resolution.
  a_lo_enough: assert property (@(posedge clk) disable iff (!rst_n)
    conv |-> (swap ? need0 : need1) <= PW'(ADC_LO));

  initial begin
    if (H != 2) $error("polymult: the ADC pairing needs exactly two row halves (NC = 2*XBS)");
    if ((SHARE % SB) != 0 || (1 << SW) != SHARE) $error("polymult: SHARE must be a power of two multiple of SB");
  end

endmodule
