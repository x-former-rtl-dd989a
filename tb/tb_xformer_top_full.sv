// tb_xformer_top_full: one complete attention layer on the accelerator at its
// full default size (288 crossbar cores, hidden size 768 = 12 heads on 32
// attention tiles, 512-token buffer, 30522-entry embedding table). It
// programs the 72 cores of layer group 0 (Q, K and V weights, 768 x 2304,
// every 2-bit slice 0 or 1 so the product is exact) and 64 embedding
// entries, streams one 64-token sequence block and checks every output
// token against a model computed here (see tb_xformer_top).
module tb_xformer_top_full;
  import xformer_pkg::*;
  localparam int T = 64, NOUT = 3*HS, NE = 64;
  logic clk = 0, rst_n = 0;
  logic w_prog_en = 0, emb_prog_en = 0, start = 0, tok_valid = 0, tok_ready;
  logic [8:0] w_prog_core; logic [2:0] w_prog_xbar; logic [6:0] w_prog_row; logic [255:0] w_prog_data;
  logic [14:0] emb_prog_addr, tok_id; logic [HS-1:0][7:0] emb_prog_data;
  logic [3:0] nblocks; logic [1:0] layer;
  logic out_valid, pe_busy, ae_busy, ae_stall, done;
  logic [8:0] out_token; logic [HS-1:0][7:0] out_vec;
  byte unsigned W [NOUT][HS];
  int E [NE][HS];
  int toks [T];
  int QKV [T][NOUT];
  longint ref_out [T][HS];
  int seen [T];
  int checks = 0, failures = 0, outs = 0, n_stall = 0, n_overlap = 0;

  xformer_top dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic longint exp_ref(input longint s);
    longint x = s >> 17;
    if (x > 31) x = 31;
    return longint'($floor(128.0 * (2.0 ** (real'(x % 4) / 4.0)) + 0.5)) << (x / 4);
  endfunction

  always @(posedge clk) if (rst_n) begin
    if (ae_stall) n_stall++;
    if (pe_busy && ae_busy && !ae_stall) n_overlap++;
  end
  always @(posedge clk) if (rst_n && out_valid) begin
    outs++; seen[out_token]++;
    for (int e = 0; e < HS; e++) begin
      checks++;
      if (out_vec[e] != 8'(ref_out[out_token][e])) begin
        failures++; if (failures < 10) $display("t%0d e%0d got %0d exp %0d", out_token, e, out_vec[e], ref_out[out_token][e]);
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < NE; t++) begin
      for (int e = 0; e < HS; e++) begin E[t][e] = $urandom_range(128, 255); emb_prog_data[e] = 8'(E[t][e]); end
      emb_prog_addr = 15'(t * 401); emb_prog_en = 1; @(posedge clk); #1;
    end
    emb_prog_en = 0;
    for (int rb = 0; rb < 6; rb++)
      for (int cb = 0; cb < 12; cb++)
        for (int x = 0; x < 6; x++)
          for (int r = 0; r < 128; r++) begin
            for (int k = 0; k < 32; k++) begin
              int o; o = cb*192 + x*32 + k;
              W[o][rb*128 + r] = byte'($urandom & 32'h55);
              w_prog_data[k*8 +: 8] = W[o][rb*128 + r];
            end
            w_prog_core = 9'(rb*12 + cb); w_prog_xbar = 3'(x); w_prog_row = 7'(r);
            w_prog_en = 1; @(posedge clk); #1;
          end
    w_prog_en = 0;
    for (int t = 0; t < T; t++) begin toks[t] = $urandom_range(0, NE-1); seen[t] = 0; end
    for (int t = 0; t < T; t++)
      for (int o = 0; o < NOUT; o++) begin
        longint y; y = 0;
        for (int i = 0; i < HS; i++) y += longint'(E[toks[t]][i]) * W[o][i];
        y = y >> PE_OUT_SHIFT; QKV[t][o] = (y > 255) ? 255 : int'(y);
      end
    for (int h = 0; h < HS/64; h++)
      for (int i = 0; i < T; i++) begin
        longint den, num [64];
        den = 0; for (int d = 0; d < 64; d++) num[d] = 0;
        for (int j = 0; j < T; j++) begin
          longint s, e;
          s = 0; for (int d = 0; d < 64; d++) s += longint'(QKV[i][h*64+d]) * QKV[j][HS + h*64+d];
          e = exp_ref(s); den += e;
          for (int d = 0; d < 64; d++) num[d] += e * QKV[j][2*HS + h*64+d];
        end
        for (int d = 0; d < 64; d++) begin
          ref_out[i][h*64+d] = num[d] / den; if (ref_out[i][h*64+d] > 255) ref_out[i][h*64+d] = 255;
        end
      end
    layer = 0; nblocks = 1;
    start = 1; @(posedge clk); #1; start = 0;
    for (int t = 0; t < T; t++) begin
      tok_id = 15'(toks[t] * 401); tok_valid = 1;
      while (!tok_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1; tok_valid = 0;
    end
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    checks++; if (outs != T) begin failures++; $display("outputs %0d", outs); end
    for (int t = 0; t < T; t++) begin checks++; if (seen[t] != 1) failures++; end
    checks++; if (n_stall == 0) failures++;
    $display("stall cycles %0d, overlap cycles %0d", n_stall, n_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
