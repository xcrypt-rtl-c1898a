// xcrypt_tile: one XCRYPT tile (encryption or decryption). It holds an input
// register (IR), P = 3 polynomial multipliers (PM0..PM2, 16 crossbars each),
// the shift-and-add unit (S+A) and an output register (OR), and performs one
// vector-vector product of module rank 3 per COMPUTE command:
//     OR[slot] = sum_p IR[p] * s[p]   in Z_{2^e}[x]/(x^N + 1)
// where s[p] is the secret polynomial programmed into multiplier p.
//
// Commands (cmd_valid/cmd_ready; a command is taken when both are high):
//  * CMD_PROGRAM: each PM p writes the negacyclic matrix of the secret held in
//    the low 4 bits of IR polynomial p into its crossbars. The decryption
//    tile does this once per key; the encryption tile once per message.
//  * CMD_COMPUTE(ebits, slot): streams the IR polynomials bit-plane by
//    bit-plane (ebits planes) through the three PMs in lock step, accumulates
//    all ADC codes in S+A modulo 2^ebits and stores the result in OR[slot].
//    Decryption v = b'*s uses ebits = 10. Encryption runs three 13-bit passes
//    (one row of A each, giving A*s') and one 10-bit pass (b*s').
// done pulses when a command finishes; busy is high while one runs, and a new
// command is not accepted until then.
//
// Timing at 1 GHz: PROGRAM takes 128*(25+2) clocks; COMPUTE takes
// 8*ebits + 5 clocks (the crossbar read cycle is 8 clocks because 8 bitlines
// share an ADC).
//
// The tile structure (IR, three PMs, S+A, OR) and its use for encryption and
// decryption follow the design description; the command set and the use of IR
// to carry the secret for programming are this implementation's choices.
//
// Lint notes: the three PMs run in lock step, so only PM0's busy, last-sample,
// slot and plane tags drive the sequencer and S+A (the others are checked
// equal by an assertion); their copies stay unused. rst_n is also used by
// the assertions' disable condition, which lint reports as a synchronous use
// of the asynchronous reset; there is no such flop.
module xcrypt_tile
  import xcrypt_pkg::*;
#(
  parameter int unsigned NC     = 256,
  parameter int unsigned XBS    = 128,
  parameter int unsigned P      = 3,
  parameter int unsigned EMAX   = 13,
  parameter int unsigned ADC_LO = 5,
  parameter int unsigned NSLOT  = 4,
  parameter int unsigned WLAT   = 25,
  localparam int unsigned H    = NC / XBS,
  localparam int unsigned CPX  = XBS / SBITS,
  localparam int unsigned G    = NC / CPX,
  localparam int unsigned NADC = XBS / ADC_SHARE,
  localparam int unsigned SW   = $clog2(ADC_SHARE)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // IR write port
  input  logic                         ir_wr,
  input  logic [$clog2(P)-1:0]         ir_poly,
  input  logic [$clog2(NC)-1:0]        ir_idx,
  input  logic [EMAX-1:0]              ir_coef,
  // OR read port
  input  logic                         or_rd,
  input  logic [$clog2(NSLOT)-1:0]     or_slot,
  input  logic [$clog2(NC)-1:0]        or_idx,
  output logic [EMAX-1:0]              or_data,
  // commands
  input  logic                         cmd_valid,
  output logic                         cmd_ready,
  input  tile_cmd_t                    cmd,
  output logic                         busy,
  output logic                         done
);

  // ------------------------------------------------------------ IR
  logic [P-1:0][H-1:0][EW-1:0]   plane_idx;
  logic [P-1:0][H-1:0][XBS-1:0]  plane_bits;
  logic [P-1:0][NC-1:0][SBITS-1:0] secret;

  input_reg #(.P(P), .NC(NC), .XBS(XBS), .EMAX(EMAX), .SB(SBITS), .EW(EW)) u_ir (
    .clk, .wr_en(ir_wr), .wr_poly(ir_poly), .wr_idx(ir_idx), .wr_coef(ir_coef),
    .plane_idx, .plane_bits, .secret
  );

  // ------------------------------------------------------------ PMs
  logic                 prog_start, comp_start;
  logic [EW-1:0]        ebits_q;
  logic [P-1:0]         pm_prog_done, pm_busy, pm_valid, pm_last;
  logic [P-1:0][SW-1:0]                        pm_slot;
  logic [P-1:0][H-1:0][EW-1:0]                 pm_plane;
  logic [P-1:0][H-1:0][G-1:0][NADC-1:0][ADC_BITS-1:0] pm_code;

  for (genvar p = 0; p < P; p++) begin : g_pm
    polymult #(
      .NC(NC), .XBS(XBS), .SB(SBITS), .EMAX(EMAX), .ABITS(ADC_BITS),
      .ADC_LO(ADC_LO), .SHARE(ADC_SHARE), .WLAT(WLAT)
    ) u_pm (
      .clk, .rst_n,
      .prog_start (prog_start),
      .prog_secret(secret[p]),
      .prog_done  (pm_prog_done[p]),
      .start      (comp_start),
      .ebits      (ebits_q),
      .plane_idx  (plane_idx[p]),
      .plane_bits (plane_bits[p]),
      .busy       (pm_busy[p]),
      .s_valid    (pm_valid[p]),
      .s_last     (pm_last[p]),
      .s_slot     (pm_slot[p]),
      .s_plane    (pm_plane[p]),
      .s_code     (pm_code[p])
    );
  end

  // ------------------------------------------------------------ S+A
  logic                     sa_clear;
  logic [NC-1:0][EMAX-1:0]  sa_acc;

  shift_add #(
    .P(P), .NC(NC), .XBS(XBS), .SB(SBITS), .EMAX(EMAX), .ABITS(ADC_BITS), .SHARE(ADC_SHARE)
  ) u_sa (
    .clk, .rst_n,
    .clear   (sa_clear),
    .ebits   (ebits_q),
    .in_valid(pm_valid[0]),
    .slot    (pm_slot[0]),
    .plane   (pm_plane[0]),
    .codes   (pm_code),
    .acc     (sa_acc)
  );

  // ------------------------------------------------------------ OR
  logic                     or_wr;
  logic [$clog2(NSLOT)-1:0] slot_q;

  output_reg #(.NSLOT(NSLOT), .NC(NC), .EMAX(EMAX)) u_or (
    .clk, .rst_n,
    .wr_en(or_wr), .wr_slot(slot_q), .wr_data(sa_acc),
    .rd_en(or_rd), .rd_slot(or_slot), .rd_idx(or_idx), .rd_data(or_data)
  );

  // ------------------------------------------------------------ sequencer
  typedef enum logic [2:0] {T_IDLE, T_PROG, T_START, T_RUN, T_STORE} tstate_e;
  tstate_e       st;
  logic [P-1:0]  prog_seen;

  assign cmd_ready = (st == T_IDLE);
  assign busy      = (st != T_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st         <= T_IDLE;
      ebits_q    <= EW'(EP);
      slot_q     <= '0;
      prog_seen  <= '0;
      prog_start <= 1'b0;
      comp_start <= 1'b0;
      sa_clear   <= 1'b0;
      or_wr      <= 1'b0;
      done       <= 1'b0;
    end else begin
      prog_start <= 1'b0;
      comp_start <= 1'b0;
      sa_clear   <= 1'b0;
      or_wr      <= 1'b0;
      done       <= 1'b0;
      unique case (st)
        T_IDLE: if (cmd_valid) begin
          unique case (cmd.op)
            CMD_PROGRAM: begin
              prog_start <= 1'b1;
              prog_seen  <= '0;
              st         <= T_PROG;
            end
            CMD_COMPUTE: begin
              ebits_q  <= cmd.ebits;
              slot_q   <= ($clog2(NSLOT))'(cmd.slot);
              sa_clear <= 1'b1;
              st       <= T_START;
            end
            default: done <= 1'b1;   // NOP
          endcase
        end
        T_PROG: begin
          prog_seen <= prog_seen | pm_prog_done;
          if ((prog_seen | pm_prog_done) == '1) begin
            done <= 1'b1;
            st   <= T_IDLE;
          end
        end
        T_START: begin
          comp_start <= 1'b1;
          st         <= T_RUN;
        end
        T_RUN: if (pm_last[0]) st <= T_STORE;   // S+A adds the last codes at this edge
        T_STORE: begin
          or_wr <= 1'b1;
          done  <= 1'b1;
          st    <= T_IDLE;
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  // The three PMs run in lock step, so PM0's sample tags describe all of them.
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    pm_valid[0] |-> (pm_valid == '1 && pm_slot[1] == pm_slot[0] && pm_plane[1] == pm_plane[0]));
  a_ebits: assert property (@(posedge clk) disable iff (!rst_n)
    (st == T_IDLE && cmd_valid && cmd.op == CMD_COMPUTE) |-> (cmd.ebits >= 2 && cmd.ebits <= EW'(EMAX)));

endmodule
