// xcrypt_io: the chip's external I/O interface. A host (the processor the
// accelerator sits next to) reaches both tiles through one request/response
// bus. Address = {tile, region, offset}:
//   tile   (1 bit)  0 = encryption tile, 1 = decryption tile
//   region (2 bits) REG_IR   write: input coefficient, offset = poly*N + index
//                   REG_OR   read:  result coefficient, offset = slot*N + index
//                   REG_CTRL write: tile command (tile_cmd_t in the low bits)
//                            read:  {busy, 15'b0, number of finished commands}
// A request is accepted when req_valid and req_ready are both high. A command
// write to a tile that is still busy is held off (req_ready low) until the
// tile can take it, which is the only back-pressure. Read data comes back with
// rsp_valid exactly one clock after the request is accepted; writes get no
// response. Writes to REG_OR and reads of REG_IR are ignored (a read returns 0).
//
// The design description shows this interface only as a block; the bus, the
// address map and the status word are this implementation's choices.
module xcrypt_io
  import xcrypt_pkg::*;
#(
  parameter int unsigned NC    = 256,
  parameter int unsigned P     = 3,
  parameter int unsigned NSLOT = 4,
  parameter int unsigned EMAX  = 13,
  parameter int unsigned AW    = 16,
  localparam int unsigned NW   = $clog2(NC),
  localparam int unsigned OW   = AW - 3
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // host bus
  input  logic                       req_valid,
  output logic                       req_ready,
  input  logic                       req_we,
  input  logic [AW-1:0]              req_addr,
  input  logic [31:0]                req_wdata,
  output logic                       rsp_valid,
  output logic [31:0]                rsp_rdata,
  // to the two tiles (index 0 = encryption, 1 = decryption)
  output logic [1:0]                 ir_wr,
  output logic [$clog2(P)-1:0]       ir_poly,
  output logic [NW-1:0]              ir_idx,
  output logic [EMAX-1:0]            ir_coef,
  output logic [1:0]                 or_rd,
  output logic [$clog2(NSLOT)-1:0]   or_slot,
  output logic [NW-1:0]              or_idx,
  input  logic [1:0][EMAX-1:0]       or_data,
  output logic [1:0]                 cmd_valid,
  input  logic [1:0]                 cmd_ready,
  output tile_cmd_t                  cmd,
  input  logic [1:0]                 busy,
  input  logic [1:0]                 done
);

  logic          tile;
  region_e       region;
  logic [OW-1:0] offset;
  logic          fire;

  assign tile   = req_addr[AW-1];
  assign region = region_e'(req_addr[AW-2 -: 2]);
  assign offset = req_addr[OW-1:0];

  // Back-pressure only for commands to a busy tile.
  assign req_ready = !(req_we && region == REG_CTRL) || cmd_ready[tile];
  assign fire      = req_valid && req_ready;

  always_comb begin
    ir_wr     = '0;
    or_rd     = '0;
    cmd_valid = '0;
    ir_poly   = ($clog2(P))'(offset >> NW);
    ir_idx    = offset[NW-1:0];
    ir_coef   = req_wdata[EMAX-1:0];
    or_slot   = ($clog2(NSLOT))'(offset >> NW);
    or_idx    = offset[NW-1:0];
    cmd       = tile_cmd_t'(req_wdata[$bits(tile_cmd_t)-1:0]);
    if (fire) begin
      if (req_we && region == REG_IR)    ir_wr[tile]     = 1'b1;
      if (req_we && region == REG_CTRL)  cmd_valid[tile] = 1'b1;
      if (!req_we && region == REG_OR)   or_rd[tile]     = 1'b1;
    end
  end

  // Completion counters for the status word.
  logic [1:0][15:0] ndone;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ndone <= '0;
    else for (int t = 0; t < 2; t++) if (done[t]) ndone[t] <= ndone[t] + 1'b1;
  end

  // Read response one clock after acceptance.
  logic    rd_q, tile_q;
  region_e region_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_q     <= 1'b0;
      tile_q   <= 1'b0;
      region_q <= REG_IR;
    end else begin
      rd_q     <= fire && !req_we;
      tile_q   <= tile;
      region_q <= region;
    end
  end

  always_comb begin
    rsp_valid = rd_q;
    rsp_rdata = '0;
    if (rd_q) begin
      unique case (region_q)
        REG_OR:   rsp_rdata = 32'(or_data[tile_q]);
        REG_CTRL: rsp_rdata = {busy[tile_q], 15'b0, ndone[tile_q]};
        default:  rsp_rdata = '0;
      endcase
    end
  end

  // A command is only issued to a tile that is ready for it.
  a_cmd_ready: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid & ~cmd_ready) == '0);

endmodule
