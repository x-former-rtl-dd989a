// tb_xformer_top: end-to-end test of the accelerator at reduced size (one
// tile of 8 cores, hidden size 128 = 2 heads, 4 attention tiles, 128-token
// sequences, 16-word vocabulary, requantisation shift 12). It programs the
// embedding table and the Q/K/V weights of two layer groups, streams token
// sequences from a model of off-chip memory with random gaps, and checks
// every attention output against a model computed here from the same
// embeddings and weights (exact MVM since every 2-bit weight slice is 0 or 1,
// shift and saturate, then per-head softmax attention as in tb_ahct).
// Runs a 2-block sequence on layer 0 and a 1-block sequence on layer 1,
// and counts the mechanisms of the design: attention passes stalled waiting
// for the projection engine, cycles in which both engines work at once
// (sequence-blocking overlap), passes that reuse the stored query block, and
// the layer switch. A mechanism that never happens counts as a failure.
module tb_xformer_top;
  import xformer_pkg::*;
  localparam int HSP = 128, T = 128, NOUT = 3*HSP, SH = 12, V_N = 16;
  logic clk = 0, rst_n = 0;
  logic w_prog_en = 0, emb_prog_en = 0, start = 0, tok_valid = 0, tok_ready;
  logic [2:0] w_prog_core, w_prog_xbar; logic [6:0] w_prog_row; logic [255:0] w_prog_data;
  logic [3:0] emb_prog_addr, tok_id; logic [HSP-1:0][7:0] emb_prog_data;
  logic [1:0] nblocks, layer;
  logic out_valid, pe_busy, ae_busy, ae_stall, done;
  logic [6:0] out_token; logic [HSP-1:0][7:0] out_vec;
  int W [2][NOUT][HSP];
  int E [V_N][HSP];
  int toks [T];
  int QKV [T][NOUT];
  longint ref_out [T][HSP];
  int seen [T];
  int checks = 0, failures = 0, outs = 0;
  int n_stall = 0, n_overlap = 0, n_qreuse = 0, n_layers = 0;

  xformer_top #(.TILES_P(1), .CORES_P_TILE(8), .HS_P(HSP), .VOCAB_P(V_N), .NAHCT(4),
                .SL_MAX_P(T), .OUT_SHIFT(SH)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (1000000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic longint exp_ref(input longint s);
    longint x = s >> 17;
    if (x > 31) x = 31;
    return longint'($floor(128.0 * (2.0 ** (real'(x % 4) / 4.0)) + 0.5)) << (x / 4);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (ae_stall) n_stall++;
    if (pe_busy && ae_busy && !ae_stall) n_overlap++;
    if (dut.u_ae.pass_start && !dut.u_ae.first) n_qreuse++;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    outs++; seen[out_token]++;
    for (int e = 0; e < HSP; e++) begin
      checks++;
      if (out_vec[e] != 8'(ref_out[out_token][e])) begin
        failures++; if (failures < 10) $display("t%0d e%0d got %0d exp %0d", out_token, e, out_vec[e], ref_out[out_token][e]);
      end
    end
  end

  task automatic model(input int g, input int ntok);
    for (int t = 0; t < ntok; t++)
      for (int o = 0; o < NOUT; o++) begin
        longint y; y = 0;
        for (int i = 0; i < HSP; i++) y += longint'(E[toks[t]][i]) * W[g][o][i];
        y = y >> SH; QKV[t][o] = (y > 255) ? 255 : int'(y);
      end
    for (int h = 0; h < 2; h++)
      for (int i = 0; i < ntok; i++) begin
        longint den, num [64];
        den = 0; for (int d = 0; d < 64; d++) num[d] = 0;
        for (int j = 0; j < ntok; j++) begin
          longint s, e;
          s = 0; for (int d = 0; d < 64; d++) s += longint'(QKV[i][h*64+d]) * QKV[j][HSP + h*64+d];
          e = exp_ref(s); den += e;
          for (int d = 0; d < 64; d++) num[d] += e * QKV[j][2*HSP + h*64+d];
        end
        for (int d = 0; d < 64; d++) begin
          ref_out[i][h*64+d] = num[d] / den; if (ref_out[i][h*64+d] > 255) ref_out[i][h*64+d] = 255;
        end
      end
  endtask

  task automatic run_layer(input int g, input int nb);
    int ntok; ntok = nb * 64;
    for (int t = 0; t < ntok; t++) begin toks[t] = $urandom_range(0, V_N-1); seen[t] = 0; end
    model(g, ntok);
    outs = 0;
    layer = 2'(g); nblocks = 2'(nb);
    start = 1; @(posedge clk); #1; start = 0;
    for (int t = 0; t < ntok; t++) begin
      repeat ($urandom_range(0, 3)) @(posedge clk); #1;
      tok_id = 4'(toks[t]); tok_valid = 1;
      while (!tok_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1; tok_valid = 0;
    end
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    checks++; if (outs != ntok) begin failures++; $display("outputs %0d", outs); end
    for (int t = 0; t < ntok; t++) begin checks++; if (seen[t] != 1) failures++; end
    n_layers++;
  endtask

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < V_N; t++) begin
      for (int e = 0; e < HSP; e++) begin E[t][e] = $urandom_range(0, 255); emb_prog_data[e] = 8'(E[t][e]); end
      emb_prog_addr = 4'(t); emb_prog_en = 1; @(posedge clk); #1;
    end
    emb_prog_en = 0;
    for (int g = 0; g < 2; g++)
      for (int cb = 0; cb < 2; cb++)
        for (int x = 0; x < 6; x++)
          for (int r = 0; r < HSP; r++) begin
            for (int k = 0; k < 32; k++) begin
              int o; o = cb*192 + x*32 + k;
              W[g][o][r] = int'($urandom & 32'h55);
              w_prog_data[k*8 +: 8] = 8'(W[g][o][r]);
            end
            w_prog_core = 3'(g*2 + cb); w_prog_xbar = 3'(x); w_prog_row = 7'(r);
            w_prog_en = 1; @(posedge clk); #1;
          end
    w_prog_en = 0;
    run_layer(0, 2);
    run_layer(1, 1);
    $display("mechanisms: stall=%0d overlap=%0d qreuse=%0d layers=%0d", n_stall, n_overlap, n_qreuse, n_layers);
    checks++; if (n_stall == 0)   begin failures++; $display("no attention stall"); end
    checks++; if (n_overlap == 0) begin failures++; $display("no engine overlap"); end
    checks++; if (n_qreuse == 0)  begin failures++; $display("no query-block reuse"); end
    checks++; if (n_layers != 2)  failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
