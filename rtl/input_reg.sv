// input_reg: the tile's input register (IR). It holds P input polynomials of
// NC coefficients, EMAX bits each, written one coefficient at a time by the
// host interface. It feeds the polynomial multipliers in two ways:
//  * bit-planes: multiplier p asks for bit-plane plane_idx[p][h] of row half h
//    and receives bit t of each of that half's XBS coefficients, which drive
//    the crossbar's 1-bit DACs (the input is streamed one bit per read);
//  * secrets: before programming, the host writes the secret polynomials here
//    and the low SB bits of every coefficient are handed to the multipliers'
//    row generators (prog_secret), so no separate key buffer is needed.
// Plane and secret outputs are combinational from the stored words; a write
// is visible the clock after wr_en.
module input_reg #(
  parameter int unsigned P    = 3,
  parameter int unsigned NC   = 256,
  parameter int unsigned XBS  = 128,
  parameter int unsigned EMAX = 13,
  parameter int unsigned SB   = 4,
  parameter int unsigned EW   = 4,
  localparam int unsigned H   = NC / XBS
) (
  input  logic                              clk,
  input  logic                              wr_en,
  input  logic [$clog2(P)-1:0]              wr_poly,
  input  logic [$clog2(NC)-1:0]             wr_idx,
  input  logic [EMAX-1:0]                   wr_coef,
  input  logic [P-1:0][H-1:0][EW-1:0]       plane_idx,
  output logic [P-1:0][H-1:0][XBS-1:0]      plane_bits,
  output logic [P-1:0][NC-1:0][SB-1:0]      secret
);

  logic [P-1:0][NC-1:0][EMAX-1:0] mem;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_poly][wr_idx] <= wr_coef;
  end

  always_comb begin
    for (int p = 0; p < P; p++) begin
      for (int h = 0; h < H; h++)
        for (int r = 0; r < XBS; r++)
          plane_bits[p][h][r] = (int'(plane_idx[p][h]) < EMAX) ?
                                mem[p][h*XBS + r][plane_idx[p][h]] : 1'b0;
      for (int j = 0; j < NC; j++) secret[p][j] = mem[p][j][SB-1:0];
    end
  end

endmodule
