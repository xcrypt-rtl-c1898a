// adc: behavioural model of a variable-precision ADC (mixed-signal part; the
// real converter is an adaptive SAR-style ADC of 1 GS/s).
//
// Function. On conv the held bitline level is converted with `prec` bits of
// resolution, prec <= RES. Because every result of this accelerator is taken
// modulo a power of two, a sample whose weight is 2^k only contributes its low
// (e - k) bits; the converter therefore resolves the low `prec` bits of the
// level and stops early, which is what saves energy. prec = 0 means the sample
// is not needed and no conversion is done. A level that does not fit in RES
// bits at full precision loses its upper bits (the design relies on the
// bitline levels staying below 2^RES).
//
// Timing: one conversion per clock; code appears the clock after conv.
module adc #(
  parameter int unsigned RES  = 6,   // full resolution of this converter
  parameter int unsigned IN_W = 8,   // width of the analog level
  localparam int unsigned PW = 4
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            conv,
  input  logic [IN_W-1:0] level,
  input  logic [PW-1:0]   prec,
  output logic [RES-1:0]  code
);

  logic [IN_W-1:0] mask;
  always_comb begin
    mask = '0;
    for (int b = 0; b < IN_W; b++)
      mask[b] = (b < int'(prec)) && (b < RES);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code <= '0;
    end else if (conv) begin
      code <= RES'(level & mask);
    end
  end

  // A converter is never asked for more bits than it has.
  a_prec_in_range: assert property (@(posedge clk) disable iff (!rst_n) conv |-> prec <= PW'(RES));

endmodule
