// tb_projection_engine: reduced Projection Engine (8 cores, hidden size 128,
// so one row block and two column blocks per layer group and four groups,
// 16-entry embedding table). Programs random embeddings and, for two layer
// groups, random weights whose 2-bit slices are 0 or 1 (so no ADC column can
// saturate and the result is the exact product). For random tokens it checks
// all 384 Q/K/V outputs against min((E[tok] . W) >> 12, 255), that the layer
// input selects the weights, the token-to-output latency (518 cycles), the
// saturation of large sums (token 15 is all 255), and that a held qkv_ready
// stalls the engine without losing the output.
module tb_projection_engine;
  import xformer_pkg::*;
  localparam int HSP = 128, NOUT = 3*HSP, SH = 12;
  logic clk = 0, rst_n = 0;
  logic w_prog_en = 0, emb_prog_en = 0, tok_valid = 0, tok_ready, qkv_valid, qkv_ready = 1, busy;
  logic [2:0] w_prog_core, w_prog_xbar; logic [6:0] w_prog_row; logic [255:0] w_prog_data;
  logic [3:0] emb_prog_addr, tok_id; logic [HSP-1:0][7:0] emb_prog_data;
  logic [1:0] layer;
  logic [NOUT-1:0][7:0] qkv;
  int W [2][NOUT][HSP];
  logic [HSP-1:0][7:0] E [16];
  int checks = 0, failures = 0, stalls = 0;

  projection_engine #(.TILES_P(1), .CORES_P_TILE(8), .HS_P(HSP), .VOCAB_P(16), .OUT_SHIFT(SH)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int t = 0; t < 16; t++) begin
      for (int e = 0; e < HSP; e++) E[t][e] = (t == 15) ? 8'd255 : 8'($urandom);  // entry 15 saturates
      emb_prog_addr = 4'(t); emb_prog_data = E[t]; emb_prog_en = 1; @(posedge clk); #1;
    end
    emb_prog_en = 0;
    for (int g = 0; g < 2; g++)
      for (int cb = 0; cb < 2; cb++)
        for (int x = 0; x < 6; x++)
          for (int r = 0; r < HSP; r++) begin
            for (int k = 0; k < 32; k++) begin
              int o; o = cb*192 + x*32 + k;
              W[g][o][r] = int'($urandom & 32'h55);     // slices 0/1 only
              w_prog_data[k*8 +: 8] = 8'(W[g][o][r]);
            end
            w_prog_core = 3'(g*2 + cb); w_prog_xbar = 3'(x); w_prog_row = 7'(r);
            w_prog_en = 1; @(posedge clk); #1;
          end
    w_prog_en = 0;
    for (int n = 0; n < 6; n++) begin
      int cyc, g;
      g = n % 2; layer = 2'(g);
      tok_id = (n < 2) ? 4'd15 : 4'($urandom_range(0, 14)); tok_valid = 1;
      while (!tok_ready) begin @(posedge clk); #1; end
      @(posedge clk); #1; tok_valid = 0; cyc = 1;
      if (n >= 4) qkv_ready = 0;
      while (!qkv_valid) begin @(posedge clk); #1; cyc++; end
      checks++; if (cyc != 518) begin failures++; $display("latency %0d", cyc); end
      if (!qkv_ready) begin       // hold the output: engine must wait
        repeat (7) begin @(posedge clk); #1; checks++; stalls++; if (!qkv_valid || tok_ready) failures++; end
        qkv_ready = 1;
      end
      for (int o = 0; o < NOUT; o++) begin
        longint y; y = 0;
        for (int i = 0; i < HSP; i++) y += longint'(E[tok_id][i]) * W[g][o][i];
        y = y >> SH; if (y > 255) y = 255;
        checks++; if (qkv[o] != 8'(y)) begin failures++; if (failures < 10) $display("o%0d got %0d exp %0d", o, qkv[o], y); end
      end
      @(posedge clk); #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
