// xbar: behavioural model of a memristor crossbar with 1-bit cells, 1-bit
// wordline DACs and per-bitline sample-and-hold. Not synthesizable logic in the
// real chip: the array, the DACs and the S&H are analog circuits.
//
// Function. Each cell stores one bit (high or low conductance). Applying a
// 1-bit voltage to every wordline makes each bitline carry a current equal to
// the sum over rows of (input bit AND cell bit); the model represents that
// current as an integer in units of one on-cell current, 0..ROWS. On a read
// strobe the bitline levels of all columns are sampled into the S&H and held
// until the next read, so that shared ADCs can convert them one by one.
//
// Programming. A row is written through parallel write drivers; the write takes
// WRITE_LAT clocks (25 ns at 1 GHz, following the cell model used for the
// design), during which wr_busy is high and further writes are ignored. Cells
// are non-volatile: reset does not clear them.
//
// Interface: wr_en/wr_row/wr_data start a row write; rd_en with rd_in applies
// the input vector and updates bl one clock later. Reads during a write are
// allowed and see the old row contents.
module xbar #(
  parameter int unsigned ROWS      = 128,
  parameter int unsigned COLS      = 128,
  parameter int unsigned WRITE_LAT = 25,
  localparam int unsigned LW = $clog2(ROWS + 1)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // programming
  input  logic                       wr_en,
  input  logic [$clog2(ROWS)-1:0]    wr_row,
  input  logic [COLS-1:0]            wr_data,
  output logic                       wr_busy,
  // dot product
  input  logic                       rd_en,
  input  logic [ROWS-1:0]            rd_in,
  output logic [COLS-1:0][LW-1:0]    bl
);

  logic [COLS-1:0] cells [ROWS];

  logic [$clog2(WRITE_LAT+1)-1:0] wcnt;
  logic [$clog2(ROWS)-1:0]        wrow_q;
  logic [COLS-1:0]                wdata_q;

  assign wr_busy = (wcnt != 0);

  // Row programming: latch the row, commit it after WRITE_LAT clocks.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt    <= '0;
      wrow_q  <= '0;
      wdata_q <= '0;
    end else if (wcnt != 0) begin
      wcnt <= wcnt - 1'b1;
      if (wcnt == 1) cells[wrow_q] <= wdata_q;
    end else if (wr_en) begin
      wcnt    <= ($clog2(WRITE_LAT+1))'(WRITE_LAT);
      wrow_q  <= wr_row;
      wdata_q <= wr_data;
    end
  end

  // Analog dot product (Kirchhoff current sum per bitline), sampled and held.
  for (genvar c = 0; c < COLS; c++) begin : g_col
    logic [ROWS-1:0] colv;   // cells of column c, one bit per row
    logic [LW-1:0]   sum;
    always_comb begin
      for (int r = 0; r < ROWS; r++) colv[r] = cells[r][c];
      sum = LW'($countones(rd_in & colv));
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)     bl[c] <= '0;
      else if (rd_en) bl[c] <= sum;
    end
  end

endmodule
