// nvm_core: one Projection Engine core, the weight-stationary MVM unit built
// from ReRAM crossbars (IR -> DAC -> crossbar -> ADC -> OR).
//
// The core holds XBARS crossbars. Each crossbar stores a ROWS x 32 block of
// 8-bit weights by bit slicing: weight (row r, output k) occupies columns
// 4k..4k+3, column 4k+s holding weight bits [2s+1:2s]. An input vector of
// ROWS 8-bit values is latched in the input register (IR) and streamed one
// bit-plane per step through the 1-bit DACs, LSB first. For each bit-plane
// the two shared ADCs walk the 128 columns two at a time (64 cycles), and the
// shift-and-add logic adds each conversion into the output register (OR):
//   y[k] += adc << (bit + 2*slice).
// All operands are unsigned (own choice). ADC saturation (see reram_crossbar)
// is kept, so y equals the exact product only while no column exceeds 255.
//
// Interface: program rows with prog_*; pulse start with x_in valid; done
// pulses when y_out holds W^T x. y_out[XBAR*32 + k] is output k of crossbar
// XBAR. Latency: start to done = 8 bit-planes * 64 column pairs + 1 = 513
// cycles; a new start is ignored while busy.
module nvm_core
  import xformer_pkg::*;
#(
  parameter int unsigned XBARS = XBARS_PER_CORE
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   prog_en,
  input  logic [$clog2(XBARS)-1:0]               prog_xbar,
  input  logic [$clog2(XBAR_ROWS)-1:0]           prog_row,
  input  logic [XBAR_COLS*CELL_BITS-1:0]         prog_data,
  input  logic                                   start,
  input  logic [XBAR_ROWS-1:0][DATA_W-1:0]       x_in,
  output logic                                   busy,
  output logic                                   done,
  output logic [XBARS*XBAR_OUTS-1:0][CORE_ACC_W-1:0] y_out
);
  localparam int unsigned GROUPS = XBAR_COLS / ADCS;   // column pairs
  localparam int unsigned SEL_W  = $clog2(GROUPS);
  localparam int unsigned BIT_W  = $clog2(DATA_W);

  logic [XBAR_ROWS-1:0][DATA_W-1:0] ir;      // input register
  logic                  issuing;
  logic [BIT_W-1:0]      bit_q;
  logic [SEL_W-1:0]      sel_q;
  logic                  v_d, last_d;        // conversion returning this cycle
  logic [BIT_W-1:0]      bit_d;
  logic [SEL_W-1:0]      sel_d;
  logic [XBAR_ROWS-1:0]  dac_in;
  logic [XBARS-1:0][ADCS-1:0][ADC_BITS-1:0] adc;

  always_comb
    for (int r = 0; r < XBAR_ROWS; r++) dac_in[r] = ir[r][bit_q];

  for (genvar x = 0; x < XBARS; x++) begin : g_xbar
    reram_crossbar #(.ROWS(XBAR_ROWS), .COLS(XBAR_COLS), .CELL_BITS(CELL_BITS),
                     .ADCS(ADCS), .ADC_BITS(ADC_BITS)) u_xbar (
      .clk      (clk),
      .prog_en  (prog_en && prog_xbar == x),
      .prog_row (prog_row),
      .prog_data(prog_data),
      .en       (issuing),
      .dac_in   (dac_in),
      .adc_sel  (sel_q),
      .adc_out  (adc[x])
    );
  end

  wire last_issue = (bit_q == BIT_W'(DATA_W - 1)) && (sel_q == SEL_W'(GROUPS - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; issuing <= 1'b0; done <= 1'b0;
      bit_q <= '0; sel_q <= '0; v_d <= 1'b0; last_d <= 1'b0;
      bit_d <= '0; sel_d <= '0; ir <= '0; y_out <= '0;
    end else begin
      done <= 1'b0;
      v_d  <= issuing;
      last_d <= issuing && last_issue;
      bit_d <= bit_q;
      sel_d <= sel_q;
      if (start && !busy) begin
        ir <= x_in; y_out <= '0; busy <= 1'b1; issuing <= 1'b1;
        bit_q <= '0; sel_q <= '0;
      end else if (issuing) begin
        sel_q <= sel_q + 1'b1;
        if (sel_q == SEL_W'(GROUPS - 1)) bit_q <= bit_q + 1'b1;
        if (last_issue) issuing <= 1'b0;
      end
      // shift-and-add of the conversions into the output register
      if (v_d) begin
        // the ADCS columns converted together belong to the same weight
        // (ADCS divides SLICES), so their shifted values are summed first
        for (int x = 0; x < XBARS; x++) begin
          automatic int unsigned k = x * XBAR_OUTS + (int'(sel_d) * ADCS) / SLICES;
          automatic logic [CORE_ACC_W-1:0] add = '0;
          for (int a = 0; a < ADCS; a++) begin
            automatic int unsigned col = int'(sel_d) * ADCS + a;
            add += CORE_ACC_W'(adc[x][a]) << (int'(bit_d) + CELL_BITS * (col % SLICES));
          end
          y_out[k] <= y_out[k] + add;
        end
        if (last_d) begin done <= 1'b1; busy <= 1'b0; end
      end
    end
  end

endmodule
