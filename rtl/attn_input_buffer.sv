// attn_input_buffer: the Attention Engine's transposable input buffer. It
// receives the Q, K and V vectors of each token from the Projection Engine
// and serves the attention tiles in two orientations.
//
// Write: wr_en stores the 3*HS_P bytes of token wr_token (Q, then K, then V).
// Read (registered, data in the next cycle), one read port shared by all
// heads, rd_data[h*SB + e] going to head h:
//   RD_K / RD_V  row read of token rd_block*SB + rd_idx: element e is
//                dimension h*HSS + e of that token's K or V vector;
//   RD_QT        transposed read of query block rd_block: element e is
//                dimension h*HSS + rd_idx of token rd_block*SB + e,
//                i.e. one head dimension across the SB queries, which is the
//                row the Query banks store.
// SB must equal HSS so both orientations fill the HS_P-wide port.
// Depth SL_MAX_P covers the longest evaluated sequence (512). The source
// names the buffer and says it is transposable; depth and port layout are
// this design's.
module attn_input_buffer
  import xformer_pkg::*;
#(
  parameter int unsigned SL_MAX_P = SL_MAX,
  parameter int unsigned HS_P     = HS,
  parameter int unsigned SB_P     = SB,
  parameter int unsigned HSS_P    = HSS,
  localparam int unsigned NBLK    = SL_MAX_P / SB_P
) (
  input  logic                               clk,
  input  logic                               wr_en,
  input  logic [$clog2(SL_MAX_P)-1:0]        wr_token,
  input  logic [3*HS_P-1:0][DATA_W-1:0]      wr_qkv,
  input  logic                               rd_en,
  input  rd_mode_t                           rd_mode,
  input  logic [$clog2(NBLK)-1:0]            rd_block,
  input  logic [$clog2(SB_P)-1:0]            rd_idx,
  output logic [HS_P-1:0][DATA_W-1:0]        rd_data
);
  localparam int unsigned NH = HS_P / HSS_P;

  logic [HS_P-1:0][DATA_W-1:0] qm [SL_MAX_P];
  logic [HS_P-1:0][DATA_W-1:0] km [SL_MAX_P];
  logic [HS_P-1:0][DATA_W-1:0] vm [SL_MAX_P];

  wire [$clog2(SL_MAX_P)-1:0] row_tok = {rd_block, rd_idx};

  always_ff @(posedge clk) begin
    if (wr_en) begin
      qm[wr_token] <= wr_qkv[0      +: HS_P];
      km[wr_token] <= wr_qkv[HS_P   +: HS_P];
      vm[wr_token] <= wr_qkv[2*HS_P +: HS_P];
    end
    if (rd_en) begin
      unique case (rd_mode)
        RD_K: rd_data <= km[row_tok];
        RD_V: rd_data <= vm[row_tok];
        default:   // RD_QT
          for (int h = 0; h < NH; h++)
            for (int e = 0; e < SB_P; e++)
              rd_data[h*SB_P + e] <= qm[{rd_block, $clog2(SB_P)'(e)}][h*HSS_P + int'(rd_idx)];
      endcase
    end
  end

  initial assert (SB_P == HSS_P) else $error("SB must equal HSS");

endmodule
