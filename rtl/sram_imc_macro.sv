// sram_imc_macro: behavioural model of an 8T-SRAM compute-in-memory macro
// with its row decoder, column drivers and column ADCs. In silicon the
// multiply-accumulate is analog (read bit-lines discharge in proportion to
// the number of conducting cells); this model reproduces the digital result.
//
// Write: the decoder enables write word-line wr_row and the column drivers
// put wr_data on the write bit-lines (one full row per cycle). Compute: each
// row's read word-line is driven by one input bit in_bits[r]; every column c
// returns pop[c] = number of rows with in_bits[r] = 1 and cell (r,c) = 1,
// i.e. a 1-bit x 1-bit dot product over the column. The 8T cell's separate
// read port lets all rows be active at once.
// Timing: pop is registered, valid the cycle after en. The column ADCs are
// taken as exact (own choice: their resolution is not given; a column count
// needs log2(ROWS+1) bits). One ADC per column is this design's choice.
module sram_imc_macro #(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 128
) (
  input  logic                                  clk,
  input  logic                                  wr_en,
  input  logic [$clog2(ROWS)-1:0]               wr_row,
  input  logic [COLS-1:0]                       wr_data,
  input  logic                                  en,
  input  logic [ROWS-1:0]                       in_bits,
  output logic [COLS-1:0][$clog2(ROWS+1)-1:0]   pop
);
  // column-major storage: cells[c][r]
  logic [ROWS-1:0] cells [COLS];

  always_ff @(posedge clk) begin
    if (wr_en)
      for (int c = 0; c < COLS; c++) cells[c][wr_row] <= wr_data[c];
    if (en)
      for (int c = 0; c < COLS; c++)
        pop[c] <= $clog2(ROWS+1)'($countones(cells[c] & in_bits));
  end

endmodule
