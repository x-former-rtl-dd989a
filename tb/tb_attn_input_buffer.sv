// tb_attn_input_buffer: fills a reduced buffer (4 blocks, 2 heads) with
// random Q/K/V tokens and checks row reads of K and V and transposed reads of
// Q (one head dimension across a block's queries) against the stored data.
module tb_attn_input_buffer;
  import xformer_pkg::*;
  localparam int SLM = 256, HSP = 128, NH = 2;
  logic clk = 0, wr_en = 0, rd_en = 0;
  logic [7:0] wr_token; logic [3*HSP-1:0][7:0] wr_qkv;
  rd_mode_t rd_mode; logic [1:0] rd_block; logic [5:0] rd_idx;
  logic [HSP-1:0][7:0] rd_data;
  logic [3*HSP-1:0][7:0] ref_tok [SLM];
  int checks = 0, failures = 0;

  attn_input_buffer #(.SL_MAX_P(SLM), .HS_P(HSP)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    @(posedge clk); #1;
    for (int t = 0; t < SLM; t++) begin
      for (int e = 0; e < 3*HSP; e++) wr_qkv[e] = 8'($urandom);
      ref_tok[t] = wr_qkv; wr_token = 8'(t); wr_en = 1; @(posedge clk); #1;
    end
    wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      int m; m = $urandom_range(0, 2);
      rd_mode = rd_mode_t'(m); rd_block = 2'($urandom_range(0, 3)); rd_idx = 6'($urandom_range(0, 63));
      rd_en = 1; @(posedge clk); #1; rd_en = 0;
      for (int h = 0; h < NH; h++)
        for (int e = 0; e < 64; e++) begin
          logic [7:0] exp_v;
          if (rd_mode == RD_QT) exp_v = ref_tok[rd_block*64 + e][h*64 + rd_idx];
          else exp_v = ref_tok[rd_block*64 + rd_idx][(rd_mode == RD_K ? HSP : 2*HSP) + h*64 + e];
          checks++; if (rd_data[h*64 + e] !== exp_v) failures++;
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
