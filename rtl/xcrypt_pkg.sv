// xcrypt_pkg: sizes and types shared by the crossbar polynomial-multiplier tiles.
//
// The numbers are those of the SABER parameter set with AES-192-like security
// (module rank L = 3, degree N = 256, log p = 10, log q = 13, secrets of 4 bits)
// and of the schoolbook crossbar tile: 128x128 crossbars of 1-bit cells, one
// 6-bit ADC shared by 8 bitlines, 1 GHz clock so that one clock is one ADC
// conversion and a 25 ns cell write is 25 clocks. The host-bus layout at the
// end is a choice of this implementation.
package xcrypt_pkg;

  // SABER (L = 3 variant)
  localparam int unsigned N      = 256;  // polynomial degree
  localparam int unsigned L      = 3;    // module rank: polynomials per vector
  localparam int unsigned EP     = 10;   // log2 p
  localparam int unsigned EQ     = 13;   // log2 q
  localparam int unsigned SBITS  = 4;    // bits per secret coefficient (two's complement)

  // Crossbar tile (X-SB)
  localparam int unsigned XB        = 128; // crossbar rows and columns
  localparam int unsigned ADC_BITS  = 6;   // full-precision ADC resolution
  localparam int unsigned ADC_SHARE = 8;   // bitlines served by one ADC
  localparam int unsigned WRITE_LAT = 25;  // clocks to program one crossbar row (25 ns)

  // Widths derived from the above
  localparam int unsigned EW = 4;          // width of a bit-plane count / modulus exponent
  localparam int unsigned PW = 4;          // width of an ADC precision

  // Tile commands
  typedef enum logic [1:0] {
    CMD_NOP     = 2'd0,
    CMD_PROGRAM = 2'd1,   // write the secret polynomials held in IR into the crossbars
    CMD_COMPUTE = 2'd2    // one vector-vector product of IR against the stored secret
  } cmd_e;

  typedef struct packed {
    cmd_e          op;
    logic [EW-1:0] ebits;  // result modulus exponent (EP or EQ): also the number of input bit-planes
    logic [1:0]    slot;   // output-register slot written at the end of a COMPUTE
  } tile_cmd_t;

  // Host bus address map: {tile, region, offset}
  typedef enum logic [1:0] {
    REG_IR   = 2'd0,   // write: input coefficient, offset = poly*N + index
    REG_OR   = 2'd1,   // read: result coefficient, offset = slot*N + index
    REG_CTRL = 2'd2    // write: tile_cmd_t; read: status
  } region_e;

  // Required ADC precision for a sample whose weight is 2^k in a result mod 2^e
  // (Fig. 8a): bits above e-k never reach the result.
  function automatic logic [PW-1:0] need_prec(input int unsigned k, input int unsigned e,
                                              input int unsigned full);
    if (k >= e) return '0;
    else if (e - k >= full) return PW'(full);
    else return PW'(e - k);
  endfunction

endpackage
