// output_reg: the tile's output register (OR). It keeps NSLOT result
// polynomials (one per COMPUTE pass of an operation: for encryption the three
// coefficients of A*s' and the inner product b*s'; for decryption one). At the
// end of a pass the whole shift-and-add result is captured into the slot
// named by the command in one clock; the host reads one coefficient at a time,
// with the data valid the clock after rd_en.
module output_reg #(
  parameter int unsigned NSLOT = 4,
  parameter int unsigned NC    = 256,
  parameter int unsigned EMAX  = 13
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          wr_en,
  input  logic [$clog2(NSLOT)-1:0]      wr_slot,
  input  logic [NC-1:0][EMAX-1:0]       wr_data,
  input  logic                          rd_en,
  input  logic [$clog2(NSLOT)-1:0]      rd_slot,
  input  logic [$clog2(NC)-1:0]         rd_idx,
  output logic [EMAX-1:0]               rd_data
);

  logic [NSLOT-1:0][NC-1:0][EMAX-1:0] mem;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_slot] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     rd_data <= '0;
    else if (rd_en) rd_data <= mem[rd_slot][rd_idx];
  end

endmodule
