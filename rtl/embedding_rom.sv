// embedding_rom: the read-only NVM tiles of the Projection Engine that hold the
// word-embedding lookup table (VOCAB entries of HS 8-bit values).
//
// The table is written once through the prog_* port before inference, the
// way crossbar weights are programmed, and afterwards only read. A read
// presents rd_addr with rd_en; rd_data holds that entry from the next cycle
// on (one-cycle registered read). The table is organised as a plain memory
// array, as the source describes it. The vocabulary size (BERT's 30522
// word-pieces) and the write port are this design's own choices.
module embedding_rom
  import xformer_pkg::*;
#(
  parameter int unsigned ENTRIES = VOCAB,
  parameter int unsigned WIDTH   = HS
) (
  input  logic                               clk,
  input  logic                               prog_en,
  input  logic [$clog2(ENTRIES)-1:0]         prog_addr,
  input  logic [WIDTH-1:0][DATA_W-1:0]       prog_data,
  input  logic                               rd_en,
  input  logic [$clog2(ENTRIES)-1:0]         rd_addr,
  output logic [WIDTH-1:0][DATA_W-1:0]       rd_data
);
  logic [WIDTH-1:0][DATA_W-1:0] mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (prog_en) mem[prog_addr] <= prog_data;
    if (rd_en)   rd_data <= mem[rd_addr];
  end

endmodule
