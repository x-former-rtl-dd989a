// ahct_bank: one bank of an Attention Head Compute Tile: an 8T-SRAM
// compute-in-memory macro followed by the shift-and-add (SnA) block and the
// partial-sum accumulator.
//
// The macro stores ELEMS multi-bit operands per row by bit slicing across
// columns: element e, bit c sits in column e*DATA_W + c. A multi-bit input
// vector (one value per row) is bit-streamed: in each en cycle every row sees
// bit bit_idx of its value. The SnA block weights each column count by
// 2^(bit_idx + c) and adds the DATA_W columns of each element, and the
// accumulator sums over the streamed bits, so after all bits
//   acc[e] = sum_r in[r] * stored[r][e].
// Query banks use it for K x Q^T (rows = head dimensions, elements = queries),
// Value banks for Att x V (rows = keys, elements = head dimensions).
// Interface/timing: wr_* writes one row. acc_clr zeroes acc (it must not
// coincide with the accumulation of an en issued the cycle before). acc holds
// the final result from the second cycle after the last en.
module ahct_bank
  import xformer_pkg::*;
#(
  parameter int unsigned ROWS   = HSS,
  parameter int unsigned ELEMS  = BANK_ELEMS,
  parameter int unsigned IN_W   = EXP_W,       // longest streamed input
  parameter int unsigned OUT_W  = ACC_W
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              wr_en,
  input  logic [$clog2(ROWS)-1:0]           wr_row,
  input  logic [ELEMS*DATA_W-1:0]           wr_data,
  input  logic                              acc_clr,
  input  logic                              en,
  input  logic [ROWS-1:0]                   in_bits,
  input  logic [$clog2(IN_W)-1:0]           bit_idx,
  output logic [ELEMS-1:0][OUT_W-1:0]       acc
);
  localparam int unsigned COLS  = ELEMS * DATA_W;
  localparam int unsigned POP_W = $clog2(ROWS + 1);

  logic [COLS-1:0][POP_W-1:0] pop;
  logic                       v_d;
  logic [$clog2(IN_W)-1:0]    bit_d;

  sram_imc_macro #(.ROWS(ROWS), .COLS(COLS)) u_macro (
    .clk(clk), .wr_en(wr_en), .wr_row(wr_row), .wr_data(wr_data),
    .en(en), .in_bits(in_bits), .pop(pop)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_d <= 1'b0; bit_d <= '0; acc <= '0;
    end else begin
      v_d   <= en;
      bit_d <= bit_idx;
      if (acc_clr) acc <= '0;
      else if (v_d)
        for (int e = 0; e < ELEMS; e++) begin
          automatic logic [OUT_W-1:0] sna = '0;   // shift-and-add
          for (int c = 0; c < DATA_W; c++)
            sna += OUT_W'(pop[e*DATA_W + c]) << (int'(bit_d) + c);
          acc[e] <= acc[e] + sna;
        end
    end
  end

endmodule
