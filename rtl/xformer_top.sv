// xformer_top: hybrid in-memory transformer attention accelerator.
//
// A Projection Engine of ReRAM crossbar cores holds the static weights and
// turns each input token into its Query, Key and Value vectors (MVMStatic).
// An Attention Engine of 8T-SRAM compute tiles, whose contents are rewritten
// for every sequence, computes softmax(Q K^T) V for all heads (MVMDynamic).
// The controller runs one attention layer with the sequence-blocking
// dataflow: tokens stream from off-chip memory into the Projection Engine one
// after another; each finished Q/K/V vector crosses the engine-to-engine link
// into the attention input buffer; as soon as a whole block of SB tokens is
// there the attention scheduler may start the passes that need it, so the
// Attention Engine works on early blocks while later ones are being projected.
//
// Interface:
//   w_prog_*, emb_prog_*   program crossbar weights and the embedding table
//                          once (the off-chip memory's weight stream)
//   start, nblocks, layer  run one attention layer on nblocks*SB tokens with
//                          the Q/K/V weights of core group `layer`
//   tok_valid/ready, tok_id  sentence tokens from off-chip memory (valid/ready)
//   out_valid, out_token, out_vec  attention output of one token (all heads
//                          merged), tokens of a query block in order
//   pe_busy, ae_busy, ae_stall, done  status: ae_stall is high while an
//                          attention pass waits for a block still being
//                          projected; done pulses when the layer is complete.
// The feed-forward layers that follow (also run on the Projection Engine in
// the source) and the instruction-driven controller are not part of this RTL;
// the controller here is a fixed state machine.
module xformer_top
  import xformer_pkg::*;
#(
  parameter int unsigned TILES_P      = TILES,
  parameter int unsigned CORES_P_TILE = CORES_PER_TILE,
  parameter int unsigned HS_P         = HS,
  parameter int unsigned VOCAB_P      = VOCAB,
  parameter int unsigned NAHCT        = AE_PES * AHCT_PER_PE,
  parameter int unsigned SL_MAX_P     = SL_MAX,
  parameter int unsigned OUT_SHIFT    = PE_OUT_SHIFT,
  localparam int unsigned NCORES      = TILES_P * CORES_P_TILE,
  localparam int unsigned GROUPS      = NCORES / ((HS_P / XBAR_ROWS) * (3 * HS_P / CORE_OUTS)),
  localparam int unsigned GROUP_W     = (GROUPS > 1) ? $clog2(GROUPS) : 1,
  localparam int unsigned BW          = $clog2(SL_MAX_P / SB + 1),
  localparam int unsigned TW          = $clog2(SL_MAX_P)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  input  logic                                w_prog_en,
  input  logic [$clog2(NCORES)-1:0]           w_prog_core,
  input  logic [$clog2(XBARS_PER_CORE)-1:0]   w_prog_xbar,
  input  logic [$clog2(XBAR_ROWS)-1:0]        w_prog_row,
  input  logic [XBAR_COLS*CELL_BITS-1:0]      w_prog_data,
  input  logic                                emb_prog_en,
  input  logic [$clog2(VOCAB_P)-1:0]          emb_prog_addr,
  input  logic [HS_P-1:0][DATA_W-1:0]         emb_prog_data,
  input  logic                                start,
  input  logic [BW-1:0]                       nblocks,
  input  logic [GROUP_W-1:0]                  layer,
  input  logic                                tok_valid,
  output logic                                tok_ready,
  input  logic [$clog2(VOCAB_P)-1:0]          tok_id,
  output logic                                out_valid,
  output logic [TW-1:0]                       out_token,
  output logic [HS_P-1:0][DATA_W-1:0]         out_vec,
  output logic                                pe_busy,
  output logic                                ae_busy,
  output logic                                ae_stall,
  output logic                                done
);
  logic              running;
  logic [GROUP_W-1:0] layer_q;
  logic [TW:0]       ntok, issued, projected;
  logic              pe_tok_ready, qkv_valid;
  logic [3*HS_P-1:0][DATA_W-1:0] qkv;

  wire want_tok = running && (issued < ntok);
  assign tok_ready = pe_tok_ready && want_tok;

  projection_engine #(.TILES_P(TILES_P), .CORES_P_TILE(CORES_P_TILE), .HS_P(HS_P),
                      .VOCAB_P(VOCAB_P), .OUT_SHIFT(OUT_SHIFT)) u_pe (
    .clk(clk), .rst_n(rst_n),
    .w_prog_en(w_prog_en), .w_prog_core(w_prog_core), .w_prog_xbar(w_prog_xbar),
    .w_prog_row(w_prog_row), .w_prog_data(w_prog_data),
    .emb_prog_en(emb_prog_en), .emb_prog_addr(emb_prog_addr), .emb_prog_data(emb_prog_data),
    .layer(layer_q), .tok_valid(tok_valid && want_tok), .tok_ready(pe_tok_ready),
    .tok_id(tok_id), .qkv_valid(qkv_valid), .qkv_ready(1'b1), .qkv(qkv),
    .busy(pe_busy)
  );

  // engine-to-engine link: each Q/K/V vector goes straight into the buffer
  attention_engine #(.NAHCT(NAHCT), .HS_P(HS_P), .SL_MAX_P(SL_MAX_P)) u_ae (
    .clk(clk), .rst_n(rst_n),
    .wr_en(qkv_valid), .wr_token(TW'(projected)), .wr_qkv(qkv),
    .start(start && !running), .nblocks(nblocks),
    .blocks_ready(BW'(projected / SB)),
    .out_valid(out_valid), .out_token(out_token), .out_vec(out_vec),
    .stall(ae_stall), .busy(ae_busy), .done(done)
  );

  // controller
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; layer_q <= '0; ntok <= '0; issued <= '0; projected <= '0;
    end else begin
      if (start && !running) begin
        running <= 1'b1; layer_q <= layer;
        ntok <= (TW+1)'(nblocks) * (TW+1)'(SB); issued <= '0; projected <= '0;
      end else begin
        if (tok_valid && tok_ready) issued <= issued + 1'b1;
        if (qkv_valid) projected <= projected + 1'b1;
        if (done) running <= 1'b0;
      end
    end
  end

endmodule
