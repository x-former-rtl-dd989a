// block_seq_accumulator: the Block Sequence Accumulator of an AHCT, the
// storage that lets attention be computed one sequence block at a time.
//
// For the SB queries of the current query block it keeps, across all
// key/value sequence blocks, the running softmax denominator
//   den[i] = sum_j e[i][j]
// and the running un-normalised output row
//   num[i][d] = sum_j e[i][j] * v[j][d].
// The row is divided by den[i] only after the last key block, so the result
// equals softmax over the whole sequence although only SB x SB scores exist
// at any time. clr zeroes everything (first key block). den_add_en adds a
// column of SB weights (one per query) to den; num_add_en adds a row of DIM
// values to num[num_row]. Reads (rd_row) are combinational.
// The block's role follows the source; what it stores and the 32-bit widths
// are this design's choice (exact sums need 16.5 KB per tile at SL = 512,
// more than the published 6 KB, which does not say what it holds).
module block_seq_accumulator
  import xformer_pkg::*;
#(
  parameter int unsigned ROWS = SB,
  parameter int unsigned DIM  = HSS
) (
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic                             clr,
  input  logic                             den_add_en,
  input  logic [ROWS-1:0][EXP_W-1:0]       den_add,
  input  logic                             num_add_en,
  input  logic [$clog2(ROWS)-1:0]          num_row,
  input  logic [DIM-1:0][ACC_W-1:0]        num_add,
  input  logic [$clog2(ROWS)-1:0]          rd_row,
  output logic [DIM-1:0][ACC_W-1:0]        rd_num,
  output logic [ACC_W-1:0]                 rd_den
);
  logic [DIM-1:0][ACC_W-1:0] num [ROWS];
  logic [ROWS-1:0][ACC_W-1:0] den;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      den <= '0;
      for (int i = 0; i < ROWS; i++) num[i] <= '0;
    end else if (clr) begin
      den <= '0;
      for (int i = 0; i < ROWS; i++) num[i] <= '0;
    end else begin
      if (den_add_en)
        for (int i = 0; i < ROWS; i++) den[i] <= den[i] + ACC_W'(den_add[i]);
      if (num_add_en)
        for (int d = 0; d < DIM; d++) num[num_row][d] <= num[num_row][d] + num_add[d];
    end
  end

  assign rd_num = num[rd_row];
  assign rd_den = den[rd_row];

endmodule
