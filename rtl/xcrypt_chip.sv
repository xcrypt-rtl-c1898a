// xcrypt_chip: top level of the crossbar-based SABER accelerator (schoolbook
// organisation, X-SB). It holds one encryption tile and one decryption tile
// behind a shared external I/O interface.
//
//  * The decryption tile is meant for a server: its crossbars keep the long-
//    lived secret s, programmed once, and each decryption is one 10-bit pass
//    computing v = <b', s> mod 2^10 (3 PolyMults added) in about 80 clocks.
//  * The encryption tile is meant for a client: each message programs a fresh
//    secret s' (about 3.3k clocks, the bulk of encryption time), then three
//    13-bit passes give A*s' mod 2^13 and one 10-bit pass gives <b, s'> mod 2^10.
// Both tiles are the same module; the encryption tile pairs two full-precision
// ADCs because its 13-bit passes need it (see polymult).
//
// The SABER steps around the multiplications (hashing and sampling, rounding,
// adding the message) are left to the host: the chip returns the raw products.
//
// Interface: the host bus of xcrypt_io (see there for the address map).
// Clock: 1 GHz in the reference timing (one ADC conversion per clock).
module xcrypt_chip
  import xcrypt_pkg::*;
#(
  parameter int unsigned NC   = 256,
  parameter int unsigned XBS  = 128,
  parameter int unsigned WLAT = WRITE_LAT,
  localparam int unsigned AW  = 16
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          req_we,
  input  logic [AW-1:0] req_addr,
  input  logic [31:0]   req_wdata,
  output logic          rsp_valid,
  output logic [31:0]   rsp_rdata,
  output logic [1:0]    tile_busy
);

  localparam int unsigned NSLOT = 4;
  localparam int unsigned NW    = $clog2(NC);

  logic [1:0]                 ir_wr, or_rd, cmd_valid, cmd_ready, done;
  logic [$clog2(L)-1:0]       ir_poly;
  logic [NW-1:0]              ir_idx, or_idx;
  logic [EQ-1:0]              ir_coef;
  logic [$clog2(NSLOT)-1:0]   or_slot;
  logic [1:0][EQ-1:0]         or_data;
  tile_cmd_t                  cmd;

  xcrypt_io #(.NC(NC), .P(L), .NSLOT(NSLOT), .EMAX(EQ), .AW(AW)) u_io (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_we, .req_addr, .req_wdata, .rsp_valid, .rsp_rdata,
    .ir_wr, .ir_poly, .ir_idx, .ir_coef,
    .or_rd, .or_slot, .or_idx, .or_data,
    .cmd_valid, .cmd_ready, .cmd, .busy(tile_busy), .done
  );

  // Tile 0: encryption (13-bit passes, two full-precision ADCs per pair).
  // Tile 1: decryption (10-bit passes, one 6-bit and one 5-bit ADC per pair).
  for (genvar t = 0; t < 2; t++) begin : g_tile
    xcrypt_tile #(
      .NC(NC), .XBS(XBS), .P(L), .EMAX(EQ),
      .ADC_LO(t == 0 ? ADC_BITS : ADC_BITS - 1),
      .NSLOT(NSLOT), .WLAT(WLAT)
    ) u_tile (
      .clk, .rst_n,
      .ir_wr(ir_wr[t]), .ir_poly, .ir_idx, .ir_coef,
      .or_rd(or_rd[t]), .or_slot, .or_idx, .or_data(or_data[t]),
      .cmd_valid(cmd_valid[t]), .cmd_ready(cmd_ready[t]), .cmd,
      .busy(tile_busy[t]), .done(done[t])
    );
  end

endmodule
