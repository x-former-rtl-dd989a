// ahct: Attention Head Compute Tile. Computes one attention head for a query
// block of SB tokens against the sequence, one key/value block per pass.
//
// Banks: QBANKS Query banks and QBANKS Value banks (ahct_bank, 8 in all).
// Query bank k holds queries 16k..16k+15 of the block, stored transposed
// (row = head dimension d, 8 bit columns per query); Value bank k holds
// dimensions 16k..16k+15 of the key block's values (row = key token j).
// A pass (start, with first/last flags) runs these phases:
//   WQ  (first pass only) write Q^T, one head dimension per cycle, read
//       transposed from the input buffer; later passes reuse it (Q stationary)
//   WV  write the key block's V rows, one token per cycle
//   QK  for each key j: stream k_j bit-serially (8 cycles) into the Query
//       banks; SnA + accumulators give s[i][j] = q_i . k_j for all i; the
//       column is stored in the score scratchpad (SB x SB)
//   SM  for each column j the SFU's 64 lanes form e[i][j] = exp2_q(s[i][j])
//       (weight scratchpad) and add it to the denominators in the block
//       sequence accumulator
//   AV  for each query i: stream e[i][*] bit-serially (16 cycles) into the
//       Value banks; the 64 results num[i][d] += sum_j e[i][j] v[j][d] are
//       added in the block sequence accumulator
//   NORM (last pass only) out[i][d] = num[i][d] / den[i] (SFU divide, 8-bit)
//       and each row is emitted on out_valid.
// Reads: rd_req with rd_mode/rd_idx; the requester answers on rd_data in the
// next cycle (rd_data[e] = element e of the head-sized row).
// Cycle counts of a pass, start to done pulse: WQ 65 + WV 65 + QK 64*12
// + SM 64*2 + AV 64*19 + NORM 64*10 + 2 (NORM and WQ only where flagged).
// The phase structure (Q/V written once into 8T-SRAM banks, key vectors
// streamed into the Query banks, SFU softmax, Att x V in the Value banks,
// block sequence accumulation) follows the source; bank mapping, scratchpad
// layout, exponential and cycle schedule are this design's own.
module ahct
  import xformer_pkg::*;
#(
  parameter int unsigned SB_P  = SB,
  parameter int unsigned HSS_P = HSS
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              start,
  input  logic                              first,
  input  logic                              last,
  output logic                              busy,
  output logic                              done,
  output logic                              rd_req,
  output rd_mode_t                          rd_mode,
  output logic [$clog2(SB_P)-1:0]           rd_idx,
  input  logic [SB_P-1:0][DATA_W-1:0]       rd_data,
  output logic                              out_valid,
  output logic [$clog2(SB_P)-1:0]           out_row,
  output logic [HSS_P-1:0][DATA_W-1:0]      out_vec
);
  localparam int unsigned NB    = QBANKS;
  localparam int unsigned EL    = SB_P / NB;          // elements per bank
  localparam int unsigned IW    = $clog2(SB_P);
  localparam int unsigned LANES = VUS * VU_LANES;

  typedef enum logic [2:0] {S_IDLE, S_WQ, S_WV, S_QK, S_SM, S_AV, S_NORM, S_DONE} st_t;
  st_t state;
  logic [IW:0]  idx;           // dimension / token / key / query counter
  logic [4:0]   st;            // step within one key or query
  logic         last_q;

  // bank control
  logic                      q_wr, v_wr, q_en, v_en, q_clr, v_clr;
  logic [IW-1:0]             wr_row;
  logic [HSS_P-1:0]          q_in;
  logic [SB_P-1:0]           v_in;
  logic [$clog2(EXP_W)-1:0]  bit_idx;
  logic [NB-1:0][EL-1:0][ACC_W-1:0] q_acc, v_acc;

  // scratchpads
  logic [HSS_P-1:0][DATA_W-1:0] kvec;
  logic [SB_P-1:0][SCORE_W-1:0] score [SB_P];   // score[i] = row i, column j
  logic [SB_P-1:0][EXP_W-1:0]   wgt   [SB_P];   // softmax weights e[i][j]

  // SFU and block sequence accumulator
  logic                          sfu_start, sfu_busy, sfu_done;
  vu_op_t                        sfu_op;
  logic [LANES-1:0][ACC_W-1:0]   sfu_a, sfu_b, sfu_y;
  logic                          bsa_clr, den_en, num_en;
  logic [SB_P-1:0][EXP_W-1:0]    den_add;
  logic [HSS_P-1:0][ACC_W-1:0]   num_add, rd_num;
  logic [ACC_W-1:0]              rd_den;

  for (genvar k = 0; k < NB; k++) begin : g_bank
    ahct_bank #(.ROWS(HSS_P), .ELEMS(EL), .IN_W(EXP_W), .OUT_W(ACC_W)) u_qbank (
      .clk(clk), .rst_n(rst_n), .wr_en(q_wr), .wr_row(wr_row),
      .wr_data(rd_data[k*EL +: EL]), .acc_clr(q_clr), .en(q_en),
      .in_bits(q_in), .bit_idx(bit_idx), .acc(q_acc[k])
    );
    ahct_bank #(.ROWS(SB_P), .ELEMS(EL), .IN_W(EXP_W), .OUT_W(ACC_W)) u_vbank (
      .clk(clk), .rst_n(rst_n), .wr_en(v_wr), .wr_row(wr_row),
      .wr_data(rd_data[k*EL +: EL]), .acc_clr(v_clr), .en(v_en),
      .in_bits(v_in), .bit_idx(bit_idx), .acc(v_acc[k])
    );
  end

  sfu #(.NVU(VUS), .LANES(VU_LANES)) u_sfu (
    .clk(clk), .rst_n(rst_n), .start(sfu_start), .op(sfu_op),
    .a(sfu_a), .b(sfu_b), .busy(sfu_busy), .done(sfu_done), .y(sfu_y)
  );

  block_seq_accumulator #(.ROWS(SB_P), .DIM(HSS_P)) u_bsa (
    .clk(clk), .rst_n(rst_n), .clr(bsa_clr),
    .den_add_en(den_en), .den_add(den_add),
    .num_add_en(num_en), .num_row(idx[IW-1:0]), .num_add(num_add),
    .rd_row(idx[IW-1:0]), .rd_num(rd_num), .rd_den(rd_den)
  );

  wire [IW-1:0] i_cur   = idx[IW-1:0];
  wire          idx_end = (idx == (IW+1)'(SB_P - 1));

  // ---------------- control decode ----------------
  always_comb begin
    rd_req = 1'b0; rd_mode = RD_K; rd_idx = i_cur;
    q_wr = 1'b0; v_wr = 1'b0; q_en = 1'b0; v_en = 1'b0; q_clr = 1'b0; v_clr = 1'b0;
    wr_row = IW'(idx - 1'b1);
    bit_idx = '0; q_in = '0; v_in = '0;
    sfu_start = 1'b0; sfu_op = VU_EXP; sfu_a = '0; sfu_b = '0;
    bsa_clr = 1'b0; den_en = 1'b0; num_en = 1'b0; den_add = '0; num_add = '0;
    out_valid = 1'b0; out_row = i_cur; out_vec = '0;
    unique case (state)
      S_IDLE: bsa_clr = start && first;
      S_WQ: begin
        rd_req = (idx < (IW+1)'(SB_P)); rd_mode = RD_QT;
        q_wr = (idx != 0);
      end
      S_WV: begin
        rd_req = (idx < (IW+1)'(SB_P)); rd_mode = RD_V;
        v_wr = (idx != 0);
      end
      S_QK: begin
        rd_req = (st == 0); rd_mode = RD_K;
        q_clr  = (st == 0);
        if (st >= 2 && st <= 9) begin
          q_en = 1'b1;
          bit_idx = 4'(st - 2);
          for (int d = 0; d < HSS_P; d++) q_in[d] = kvec[d][3'(st - 2)];
        end
      end
      S_SM: begin
        sfu_start = (st == 0); sfu_op = VU_EXP;
        for (int i = 0; i < SB_P; i++) sfu_a[i] = ACC_W'(score[i][i_cur]);
        if (st == 1) begin
          den_en = 1'b1;
          for (int i = 0; i < SB_P; i++) den_add[i] = sfu_y[i][EXP_W-1:0];
        end
      end
      S_AV: begin
        v_clr = (st == 0);
        if (st >= 1 && st <= 16) begin
          v_en = 1'b1;
          bit_idx = 4'(st - 1);
          for (int j = 0; j < SB_P; j++) v_in[j] = wgt[i_cur][j][4'(st - 1)];
        end
        if (st == 18) begin
          num_en = 1'b1;
          for (int d = 0; d < HSS_P; d++) num_add[d] = v_acc[d / EL][d % EL];
        end
      end
      S_NORM: begin
        sfu_start = (st == 0); sfu_op = VU_DIV;
        for (int d = 0; d < HSS_P; d++) begin sfu_a[d] = rd_num[d]; sfu_b[d] = rd_den; end
        if (st != 0 && sfu_done) begin
          out_valid = 1'b1;
          for (int d = 0; d < HSS_P; d++) out_vec[d] = sfu_y[d][DATA_W-1:0];
        end
      end
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);

  // ---------------- sequencing ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; idx <= '0; st <= '0; last_q <= 1'b0; done <= 1'b0; kvec <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          last_q <= last; idx <= '0; st <= '0;
          state <= first ? S_WQ : S_WV;
        end
        S_WQ, S_WV: begin
          if (idx == (IW+1)'(SB_P)) begin
            idx <= '0; st <= '0;
            state <= (state == S_WQ) ? S_WV : S_QK;
          end else idx <= idx + 1'b1;
        end
        S_QK: begin
          if (st == 1) kvec <= rd_data;
          if (st == 11) begin
            for (int i = 0; i < SB_P; i++) score[i][i_cur] <= SCORE_W'(q_acc[i / EL][i % EL]);
            st <= '0; idx <= idx + 1'b1;
            if (idx_end) begin idx <= '0; state <= S_SM; end
          end else st <= st + 1'b1;
        end
        S_SM: begin
          if (st == 1) begin
            for (int i = 0; i < SB_P; i++) wgt[i][i_cur] <= sfu_y[i][EXP_W-1:0];
            st <= '0; idx <= idx + 1'b1;
            if (idx_end) begin idx <= '0; state <= S_AV; end
          end else st <= st + 1'b1;
        end
        S_AV: begin
          if (st == 18) begin
            st <= '0; idx <= idx + 1'b1;
            if (idx_end) begin idx <= '0; state <= last_q ? S_NORM : S_DONE; end
          end else st <= st + 1'b1;
        end
        S_NORM: begin
          if (st == 0) st <= 5'd1;
          else if (sfu_done) begin
            st <= '0; idx <= idx + 1'b1;
            if (idx_end) begin idx <= '0; state <= S_DONE; end
          end
        end
        S_DONE: begin done <= 1'b1; state <= S_IDLE; end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
