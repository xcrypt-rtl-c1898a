// shift_add: the tile's digital shift-and-add (S+A) unit. It turns the ADC
// codes of all polynomial multipliers into result coefficients, following the
// per-coefficient recurrence
//     coeff += code(plane t, cell column b) << (t + b)      (mod 2^e)
// summed over bit-planes t, cell columns b, both row halves and all P
// multipliers (the P products of a vector-vector multiplication are added).
//
// The secret coefficients are stored in two's complement, so the column of
// the sign bit (b = SB-1) carries weight -2^(SB-1): its samples are subtracted.
// Because only the result modulo 2^e is kept, a code that holds just the low
// (e - t - b) bits of a bitline level still gives the exact result; samples
// with t + b >= e are dropped.
//
// Interface: `clear` zeroes the accumulators and latches `ebits`; every clock
// with in_valid adds one set of codes. Codes are tagged with the bitline slot
// within an ADC's group (which fixes the output coefficient and cell column)
// and with the bit-plane of each row half. acc is the running result, already
// reduced modulo 2^ebits. Latency: one clock.
module shift_add
  import xcrypt_pkg::*;
#(
  parameter int unsigned P     = 3,     // multipliers summed
  parameter int unsigned NC    = 256,
  parameter int unsigned XBS   = 128,
  parameter int unsigned SB    = 4,
  parameter int unsigned EMAX  = 13,
  parameter int unsigned ABITS = 6,
  parameter int unsigned SHARE = 8,
  localparam int unsigned H    = NC / XBS,
  localparam int unsigned CPX  = XBS / SB,
  localparam int unsigned G    = NC / CPX,
  localparam int unsigned NADC = XBS / SHARE,
  localparam int unsigned SW   = $clog2(SHARE)
) (
  input  logic                                           clk,
  input  logic                                           rst_n,
  input  logic                                           clear,
  input  logic [EW-1:0]                                  ebits,
  input  logic                                           in_valid,
  input  logic [SW-1:0]                                  slot,
  input  logic [H-1:0][EW-1:0]                           plane,
  input  logic [P-1:0][H-1:0][G-1:0][NADC-1:0][ABITS-1:0] codes,
  output logic [NC-1:0][EMAX-1:0]                        acc
);

  logic [EW-1:0]             e_q;
  logic [NC-1:0][EMAX-1:0]   acc_d;
  logic [EMAX-1:0]           emask;

  always_comb begin
    int unsigned col, j, b, k;
    logic [EMAX-1:0] term;
    col  = 0;
    j    = 0;
    b    = 0;
    k    = 0;
    term = '0;
    emask = '0;
    for (int n = 0; n < EMAX; n++) emask[n] = (n < int'(e_q));
    acc_d = acc;
    if (in_valid) begin
      for (int g = 0; g < G; g++)
        for (int i = 0; i < NADC; i++) begin
          col = i * SHARE + int'(slot);
          j   = g * CPX + col / SB;
          b   = col % SB;
          for (int h = 0; h < H; h++) begin
            k = int'(plane[h]) + b;
            if (k < int'(e_q))
              for (int p = 0; p < P; p++) begin
                term = EMAX'(codes[p][h][g][i]) << k;
                if (b == SB - 1) acc_d[j] = acc_d[j] - term;
                else             acc_d[j] = acc_d[j] + term;
              end
          end
        end
      for (int n = 0; n < NC; n++) acc_d[n] = acc_d[n] & emask;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0;
      e_q <= EW'(EMAX);
    end else if (clear) begin
      acc <= '0;
      e_q <= ebits;
    end else begin
      acc <= acc_d;
    end
  end

endmodule
