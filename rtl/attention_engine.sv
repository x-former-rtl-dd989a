// attention_engine: the CMOS in-memory half of the accelerator, which runs the
// MVMDynamic operations Q x K^T and Att x V of multi-head attention.
//
// Contents: the transposable input buffer (Q, K, V of the whole sequence,
// written one token at a time by the Projection Engine), the global attention
// scheduler, NAHCT attention head compute tiles on a shared bus, and the
// CONCAT stage that merges the heads. Head h (h < HS/HSS) runs in tile h and
// sees dimensions h*HSS .. h*HSS+HSS-1; tiles beyond the model's head count
// stay idle (12 of 32 are used for HS = 768). All busy tiles run the same
// schedule, so tile 0 drives the shared read port and the pass handshake;
// an assertion checks that the others agree.
// Interface: wr_* stores a token's Q/K/V. start with nblocks begins one
// attention layer over nblocks*SB tokens; blocks_ready tells how many blocks
// are already complete in the buffer (passes wait for them, stall high).
// Each output token appears once on out_valid with out_token and the HS
// merged head outputs; done pulses at the end.
// Tile count (2 PEs x 16 AHCTs) follows the published configuration.
module attention_engine
  import xformer_pkg::*;
#(
  parameter int unsigned NAHCT    = AE_PES * AHCT_PER_PE,
  parameter int unsigned HS_P     = HS,
  parameter int unsigned SL_MAX_P = SL_MAX,
  localparam int unsigned MAXB    = SL_MAX_P / SB,
  localparam int unsigned BW      = $clog2(MAXB + 1)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               wr_en,
  input  logic [$clog2(SL_MAX_P)-1:0]        wr_token,
  input  logic [3*HS_P-1:0][DATA_W-1:0]      wr_qkv,
  input  logic                               start,
  input  logic [BW-1:0]                      nblocks,
  input  logic [BW-1:0]                      blocks_ready,
  output logic                               out_valid,
  output logic [$clog2(SL_MAX_P)-1:0]        out_token,
  output logic [HS_P-1:0][DATA_W-1:0]        out_vec,
  output logic                               stall,
  output logic                               busy,
  output logic                               done
);
  localparam int unsigned NH = HS_P / HSS;
  localparam int unsigned IW = $clog2(SB);

  logic [BW-1:0]  qb, kb;
  logic           pass_start, first, last, sched_busy;
  logic [NAHCT-1:0] t_busy, t_done, t_rd_req, t_out_valid;
  rd_mode_t       t_rd_mode [NAHCT];
  logic [NAHCT-1:0][IW-1:0] t_rd_idx, t_out_row;
  logic [NAHCT-1:0][HSS-1:0][DATA_W-1:0] t_out_vec;
  logic [HS_P-1:0][DATA_W-1:0] rd_data;

  global_attention_scheduler #(.MAXB(MAXB)) u_sched (
    .clk(clk), .rst_n(rst_n), .start(start), .nblocks(nblocks),
    .blocks_ready(blocks_ready), .pass_start(pass_start), .qb(qb), .kb(kb),
    .first(first), .last(last), .pass_done(t_done[0]), .stall(stall),
    .busy(sched_busy), .done(done)
  );

  attn_input_buffer #(.SL_MAX_P(SL_MAX_P), .HS_P(HS_P), .SB_P(SB), .HSS_P(HSS)) u_ibuf (
    .clk(clk), .wr_en(wr_en), .wr_token(wr_token), .wr_qkv(wr_qkv),
    .rd_en(t_rd_req[0]), .rd_mode(t_rd_mode[0]),
    .rd_block($clog2(MAXB)'((t_rd_mode[0] == RD_QT) ? qb : kb)),
    .rd_idx(t_rd_idx[0]), .rd_data(rd_data)
  );

  for (genvar h = 0; h < NAHCT; h++) begin : g_ahct
    localparam bit USED = (h < NH);
    ahct #(.SB_P(SB), .HSS_P(HSS)) u_ahct (
      .clk(clk), .rst_n(rst_n),
      .start(USED && pass_start), .first(first), .last(last),
      .busy(t_busy[h]), .done(t_done[h]),
      .rd_req(t_rd_req[h]), .rd_mode(t_rd_mode[h]), .rd_idx(t_rd_idx[h]),
      .rd_data(USED ? rd_data[(USED ? h : 0)*HSS +: HSS] : '0),
      .out_valid(t_out_valid[h]), .out_row(t_out_row[h]), .out_vec(t_out_vec[h])
    );
    if (USED) begin : g_merge   // CONCAT (merge heads)
      assign out_vec[h*HSS +: HSS] = t_out_vec[h];
    end
  end

  assign out_valid = t_out_valid[0];
  assign out_token = {$clog2(MAXB)'(qb), t_out_row[0]};
  assign busy      = sched_busy || t_busy[0];

  // the used tiles run in lockstep
  always_ff @(posedge clk)
    if (rst_n) assert (t_out_valid[NH-1:0] == '0 || &t_out_valid[NH-1:0])
      else $error("attention tiles out of step");

endmodule
