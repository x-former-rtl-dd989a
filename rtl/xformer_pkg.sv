// xformer_pkg: sizes and helper functions shared by the hybrid in-memory
// transformer accelerator.
//
// The accelerator has a Projection Engine built from ReRAM crossbar cores
// (static weights: Q/K/V generation) and an Attention Engine built from
// 8T-SRAM compute-in-memory tiles (dynamic operands: Q x K^T and Att x V).
// Crossbar geometry, cell precision, ADC count and resolution, tile/core
// counts, AHCT and bank counts, SFU lanes, BERT-base hidden sizes and the
// sequence block SB = 64 follow the published configuration. Everything
// marked "own choice" below is this design's decision where the source is
// silent: unsigned 8-bit operands, the requantisation shift, the base-2
// exponential of the SFU and the accumulator widths.
package xformer_pkg;

  // ---------------- operand precision ----------------
  localparam int unsigned DATA_W     = 8;   // weights, Q, K, V: 8-bit fixed point
  // ---------------- ReRAM crossbar / Projection Engine ----------------
  localparam int unsigned XBAR_ROWS  = 128; // crossbar 128 x 128
  localparam int unsigned XBAR_COLS  = 128;
  localparam int unsigned CELL_BITS  = 2;   // 2-bit ReRAM cell (bit slicing)
  localparam int unsigned SLICES     = DATA_W / CELL_BITS;     // 4 columns per weight
  localparam int unsigned XBAR_OUTS  = XBAR_COLS / SLICES;     // 32 weights per row
  localparam int unsigned ADCS       = 2;   // ADCs per crossbar
  localparam int unsigned ADC_BITS   = 8;   // ADC resolution
  localparam int unsigned XBARS_PER_CORE = 6;
  localparam int unsigned CORE_OUTS  = XBARS_PER_CORE * XBAR_OUTS; // 192
  localparam int unsigned CORE_ACC_W = 24;  // >= log2(128*255*255)
  localparam int unsigned TILES          = 36;
  localparam int unsigned CORES_PER_TILE = 8;
  localparam int unsigned PE_OUT_SHIFT   = 17;  // own choice: requantise sums to 8 bit
  // ---------------- model sizes ----------------
  localparam int unsigned HS     = 768;   // hidden size (BERT-base)
  localparam int unsigned HSS    = 64;    // hidden size per head
  localparam int unsigned SB     = 64;    // sequence block
  localparam int unsigned SL_MAX = 512;   // longest evaluated sequence
  localparam int unsigned VOCAB  = 30522; // own choice: BERT word-piece vocabulary
  // ---------------- Attention Engine ----------------
  localparam int unsigned AE_PES        = 2;
  localparam int unsigned AHCT_PER_PE   = 16;
  localparam int unsigned BANKS         = 8;  // 4 Query banks + 4 Value banks
  localparam int unsigned QBANKS        = BANKS / 2;
  localparam int unsigned BANK_ELEMS    = SB / QBANKS;            // 16 elements per bank
  localparam int unsigned BANK_COLS     = BANK_ELEMS * DATA_W;    // 128 bit columns
  localparam int unsigned VUS           = 16;
  localparam int unsigned VU_LANES      = 4;
  localparam int unsigned SCORE_W       = 22;  // >= log2(64*255*255)
  localparam int unsigned EXP_W         = 16;  // softmax weight width
  localparam int unsigned SCORE_SHIFT   = 17;  // own choice: score scale before exp2
  localparam int unsigned ACC_W         = 32;  // numerator/denominator width

  // SFU vector-unit operations
  typedef enum logic [1:0] {VU_EXP = 2'd0, VU_ADD = 2'd1, VU_DIV = 2'd2} vu_op_t;

  // Reads an AHCT makes from the attention input buffer
  typedef enum logic [1:0] {
    RD_QT = 2'd0,   // transposed: one head dimension of the query block's SB queries
    RD_K  = 2'd1,   // key row of one token of the key block
    RD_V  = 2'd2    // value row of one token of the key block
  } rd_mode_t;

  // Base-2 exponential used by the SFU (own choice). The score is scaled to a
  // 5-bit value x = min(s >> SCORE_SHIFT, 31) read as 3.2 fixed point and the
  // result is round(128 * 2^(x/4)): the fraction table gives 2^(f/4)*128 and
  // the integer part is a left shift.
  function automatic logic [EXP_W-1:0] exp2_q(input logic [SCORE_W-1:0] s);
    logic [SCORE_W-1:0] t;
    logic [4:0]         x;
    logic [7:0]         frac;
    t = s >> SCORE_SHIFT;
    x = (t > 31) ? 5'd31 : t[4:0];
    unique case (x[1:0])
      2'd0: frac = 8'd128;
      2'd1: frac = 8'd152;
      2'd2: frac = 8'd181;
      default: frac = 8'd215;
    endcase
    return EXP_W'(frac) << x[4:2];
  endfunction

endpackage
