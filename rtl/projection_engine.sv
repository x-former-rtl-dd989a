// projection_engine: generates the Query, Key and Value vectors of one token
// (the MVMStatic part of an attention layer) in ReRAM crossbar cores.
//
// Organisation: TILES x CORES_PER_TILE nvm_core instances. The weights of one
// layer's Q, K and V projections (HS x 3*HS) are spread over a group of
// RB x CB cores, RB = HS/128 row blocks and CB = 3*HS/192 column blocks
// (6 x 12 = 72 cores for HS = 768), so the 288 cores hold GROUPS = 4 layers.
// Core index = layer*RB*CB + rb*CB + cb. Output o of the projection is output
// (o mod 192) of core column block o/192; o < HS is Q, then K, then V.
// The first core group doubles as the layer-1 cores; the embedding table sits
// in separate read-only tiles (embedding_rom).
//
// One token: (1) tok_id is looked up in the embedding table and the vector
// is written to the shared-memory input buffer; (2) the projection
// controller starts every core of the selected layer group at once (weight
// stationary, all cores in parallel), each core receiving its 128-entry row
// block; (3) when they finish, partial sums of the RB row blocks are added,
// shifted right by OUT_SHIFT and saturated to 8 bits (own choice of
// requantisation) into the shared-memory output buffer; (4) the Q/K/V vector
// is offered on qkv_valid and held until qkv_ready (a stall).
// Handshakes: tok_valid/tok_ready and qkv_valid/qkv_ready, transfer on a
// cycle with both high. Latency from token accepted to qkv_valid: 518 cycles.
// Tile/core counts follow the published configuration; the mapping of
// weights to cores and the reduction are this design's.
module projection_engine
  import xformer_pkg::*;
#(
  parameter int unsigned TILES_P      = TILES,
  parameter int unsigned CORES_P_TILE = CORES_PER_TILE,
  parameter int unsigned HS_P         = HS,
  parameter int unsigned VOCAB_P      = VOCAB,
  parameter int unsigned OUT_SHIFT    = PE_OUT_SHIFT,
  localparam int unsigned NCORES      = TILES_P * CORES_P_TILE,
  localparam int unsigned RB          = HS_P / XBAR_ROWS,
  localparam int unsigned CB          = 3 * HS_P / CORE_OUTS,
  localparam int unsigned GROUP_CORES = RB * CB,
  localparam int unsigned GROUPS      = NCORES / GROUP_CORES,
  localparam int unsigned GROUP_W     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // weight programming (once, from off-chip memory)
  input  logic                                w_prog_en,
  input  logic [$clog2(NCORES)-1:0]           w_prog_core,
  input  logic [$clog2(XBARS_PER_CORE)-1:0]   w_prog_xbar,
  input  logic [$clog2(XBAR_ROWS)-1:0]        w_prog_row,
  input  logic [XBAR_COLS*CELL_BITS-1:0]      w_prog_data,
  // embedding table programming
  input  logic                                emb_prog_en,
  input  logic [$clog2(VOCAB_P)-1:0]          emb_prog_addr,
  input  logic [HS_P-1:0][DATA_W-1:0]         emb_prog_data,
  // token in
  input  logic [GROUP_W-1:0]                  layer,
  input  logic                                tok_valid,
  output logic                                tok_ready,
  input  logic [$clog2(VOCAB_P)-1:0]          tok_id,
  // Q, K, V out
  output logic                                qkv_valid,
  input  logic                                qkv_ready,
  output logic [3*HS_P-1:0][DATA_W-1:0]       qkv,
  output logic                                busy
);
  typedef enum logic [2:0] {S_IDLE, S_EMB, S_START, S_RUN, S_REDUCE, S_OUT} state_t;
  state_t state;

  logic [GROUP_W-1:0]                   grp;
  logic [HS_P-1:0][DATA_W-1:0]          in_buf;     // shared memory: input buffer
  logic [HS_P-1:0][DATA_W-1:0]          emb_vec;
  logic [NCORES-1:0]                    core_done;
  logic [NCORES-1:0][XBARS_PER_CORE*XBAR_OUTS-1:0][CORE_ACC_W-1:0] core_y;

  embedding_rom #(.ENTRIES(VOCAB_P), .WIDTH(HS_P)) u_emb (
    .clk(clk), .prog_en(emb_prog_en), .prog_addr(emb_prog_addr), .prog_data(emb_prog_data),
    .rd_en(tok_valid && tok_ready), .rd_addr(tok_id), .rd_data(emb_vec)
  );

  for (genvar c = 0; c < NCORES; c++) begin : g_core
    localparam int unsigned RBI = (c % GROUP_CORES) / CB;
    logic core_busy;
    nvm_core #(.XBARS(XBARS_PER_CORE)) u_core (
      .clk(clk), .rst_n(rst_n),
      .prog_en  (w_prog_en && w_prog_core == c),
      .prog_xbar(w_prog_xbar), .prog_row(w_prog_row), .prog_data(w_prog_data),
      .start    (state == S_START && (GROUPS == 1 || int'(grp) == c / GROUP_CORES)),
      .x_in     (in_buf[RBI*XBAR_ROWS +: XBAR_ROWS]),
      .busy     (core_busy),
      .done     (core_done[c]),
      .y_out    (core_y[c])
    );
  end

  assign tok_ready = (state == S_IDLE);
  assign qkv_valid = (state == S_OUT);
  assign busy      = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; grp <= '0; in_buf <= '0; qkv <= '0;
    end else begin
      unique case (state)
        S_IDLE:  if (tok_valid) begin grp <= layer; state <= S_EMB; end
        S_EMB:   begin in_buf <= emb_vec; state <= S_START; end
        S_START: state <= S_RUN;
        S_RUN:   if (core_done[int'(grp) * GROUP_CORES]) state <= S_REDUCE;
        S_REDUCE: begin
          for (int cb = 0; cb < CB; cb++)
            for (int k = 0; k < CORE_OUTS; k++) begin
              automatic logic [CORE_ACC_W+7:0] sum = '0;
              for (int rb = 0; rb < RB; rb++)
                sum += (CORE_ACC_W+8)'(core_y[int'(grp) * GROUP_CORES + rb * CB + cb][k]);
              sum = sum >> OUT_SHIFT;
              qkv[cb * CORE_OUTS + k] <= (sum > 255) ? 8'hFF : sum[DATA_W-1:0];
            end
          state <= S_OUT;
        end
        S_OUT:   if (qkv_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
