// tb_attention_engine: reduced Attention Engine (hidden size 128 = 2 heads,
// 4 tiles of which 2 are used, 128-token buffer). Tokens' Q/K/V are written
// at random times and blocks_ready is raised as blocks complete, so passes
// must wait (stall). Every output token is checked against an independent
// per-head softmax model (see tb_ahct), the merged heads against their
// positions, and each token must appear exactly once.
module tb_attention_engine;
  import xformer_pkg::*;
  localparam int HSP = 128, T = 128, NHD = 2;
  logic clk = 0, rst_n = 0, wr_en = 0, start = 0, out_valid, stall, busy, done;
  logic [6:0] wr_token, out_token;
  logic [3*HSP-1:0][7:0] wr_qkv;
  logic [1:0] nblocks, blocks_ready;
  logic [HSP-1:0][7:0] out_vec;
  int Q [T][HSP], K [T][HSP], V [T][HSP];
  longint ref_out [T][HSP];
  int seen [T];
  int checks = 0, failures = 0, stalls = 0, outs = 0;

  attention_engine #(.NAHCT(4), .HS_P(HSP), .SL_MAX_P(T)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic longint exp_ref(input longint s);
    longint x = s >> 17;
    if (x > 31) x = 31;
    return longint'($floor(128.0 * (2.0 ** (real'(x % 4) / 4.0)) + 0.5)) << (x / 4);
  endfunction

  always @(posedge clk) if (stall) stalls++;
  always @(posedge clk) if (rst_n && out_valid) begin
    outs++; seen[out_token]++;
    for (int e = 0; e < HSP; e++) begin
      checks++;
      if (out_vec[e] != 8'(ref_out[out_token][e])) begin
        failures++; if (failures < 10) $display("t%0d e%0d got %0d exp %0d", out_token, e, out_vec[e], ref_out[out_token][e]);
      end
    end
  end

  initial begin
    for (int t = 0; t < T; t++) begin
      seen[t] = 0;
      for (int d = 0; d < HSP; d++) begin
        Q[t][d] = $urandom_range(0, 255); K[t][d] = $urandom_range(0, 255); V[t][d] = $urandom_range(0, 255);
      end
    end
    for (int h = 0; h < NHD; h++)
      for (int i = 0; i < T; i++) begin
        longint den, num [64];
        den = 0; for (int d = 0; d < 64; d++) num[d] = 0;
        for (int j = 0; j < T; j++) begin
          longint s, e;
          s = 0; for (int d = 0; d < 64; d++) s += longint'(Q[i][h*64+d]) * K[j][h*64+d];
          e = exp_ref(s); den += e;
          for (int d = 0; d < 64; d++) num[d] += e * V[j][h*64+d];
        end
        for (int d = 0; d < 64; d++) begin
          ref_out[i][h*64+d] = num[d] / den; if (ref_out[i][h*64+d] > 255) ref_out[i][h*64+d] = 255;
        end
      end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    nblocks = 2; blocks_ready = 0;
    start = 1; @(posedge clk); #1; start = 0;
    for (int t = 0; t < T; t++) begin
      repeat ($urandom_range(0, 40)) @(posedge clk); #1;
      for (int d = 0; d < HSP; d++) begin
        wr_qkv[d] = 8'(Q[t][d]); wr_qkv[HSP + d] = 8'(K[t][d]); wr_qkv[2*HSP + d] = 8'(V[t][d]);
      end
      wr_token = 7'(t); wr_en = 1; @(posedge clk); #1; wr_en = 0;
      blocks_ready = 2'((t + 1) / 64);
    end
    while (!done) begin @(posedge clk); #1; end
    @(posedge clk); #1;
    checks++; if (outs != T) begin failures++; $display("outputs %0d", outs); end
    for (int t = 0; t < T; t++) begin checks++; if (seen[t] != 1) failures++; end
    checks++; if (stalls == 0) begin failures++; $display("no stall"); end
    $display("stall cycles %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
