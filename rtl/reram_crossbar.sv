// reram_crossbar: behavioural model of a ReRAM crossbar with its 1-bit row
// DACs and its shared column ADCs. Not synthesizable logic in the real chip:
// the multiply-accumulate happens in the analog domain (Ohm's law per cell,
// Kirchhoff summation per bit-line); this model reproduces the digital result.
//
// Array: ROWS word-lines x COLS bit-lines, each cell holds a CELL_BITS-bit
// conductance level (0..3 for 2-bit ReRAM). Inputs arrive one bit per row per
// cycle (1-bit DAC, bit streaming). ADCS converters are shared by all columns:
// in each cycle the column group adc_sel is converted, ADC a reading column
// adc_sel*ADCS + a, and returns sum_r(dac_in[r] * cell[r][col]). The ADC has
// ADC_BITS of resolution and saturates at 2^ADC_BITS-1 (own choice: the
// source gives the resolution, not what happens above full scale; a column
// can reach 128*3 = 384).
//
// Programming (done once, before inference): prog_en writes row prog_row with
// prog_data, cell c taking bits [CELL_BITS*c +: CELL_BITS].
// Timing: adc_out is registered; it shows the conversion of the dac_in and
// adc_sel presented in the previous cycle. Crossbar geometry, cell bits, DAC
// bits, ADC count and resolution follow the published configuration.
module reram_crossbar #(
  parameter int unsigned ROWS      = 128,
  parameter int unsigned COLS      = 128,
  parameter int unsigned CELL_BITS = 2,
  parameter int unsigned ADCS      = 2,
  parameter int unsigned ADC_BITS  = 8
) (
  input  logic                              clk,
  input  logic                              prog_en,
  input  logic [$clog2(ROWS)-1:0]           prog_row,
  input  logic [COLS*CELL_BITS-1:0]         prog_data,
  input  logic                              en,        // convert this cycle
  input  logic [ROWS-1:0]                   dac_in,
  input  logic [$clog2(COLS/ADCS)-1:0]      adc_sel,
  output logic [ADCS-1:0][ADC_BITS-1:0]     adc_out
);
  localparam int unsigned SUM_W = $clog2(ROWS * ((1 << CELL_BITS) - 1) + 1) + 1;

  // Cells stored as bit-planes, column-major: plane[b][c][r] is bit b of cell (r,c).
  logic [ROWS-1:0] plane [CELL_BITS][COLS];

  always_ff @(posedge clk) begin
    if (prog_en) begin
      for (int c = 0; c < COLS; c++)
        for (int b = 0; b < CELL_BITS; b++)
          plane[b][c][prog_row] <= prog_data[CELL_BITS*c + b];
    end
  end

  always_ff @(posedge clk) begin
    if (en) begin
      for (int a = 0; a < ADCS; a++) begin
        automatic int unsigned col = int'(adc_sel) * ADCS + a;
        automatic logic [SUM_W-1:0] sum = '0;
        for (int b = 0; b < CELL_BITS; b++)
          sum += SUM_W'($countones(plane[b][col] & dac_in)) << b;
        adc_out[a] <= (sum > SUM_W'((1 << ADC_BITS) - 1)) ? ADC_BITS'((1 << ADC_BITS) - 1)
                                                           : ADC_BITS'(sum);
      end
    end
  end

endmodule
