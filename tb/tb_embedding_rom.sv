// tb_embedding_rom: writes random entries into a reduced embedding table,
// reads them back in random order and checks the data and the one-cycle read
// latency (data must not change prev the clock edge that performs the read).
module tb_embedding_rom;
  import xformer_pkg::*;
  localparam int N = 64, W = 16;
  logic clk = 0, prog_en = 0, rd_en = 0;
  logic [5:0] prog_addr, rd_addr;
  logic [W-1:0][7:0] prog_data, rd_data;
  logic [W-1:0][7:0] ref_mem [N];
  int checks = 0, failures = 0;

  embedding_rom #(.ENTRIES(N), .WIDTH(W)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (10000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  initial begin
    @(posedge clk); #1;
    for (int i = 0; i < N; i++) begin
      for (int e = 0; e < W; e++) prog_data[e] = 8'($urandom);
      ref_mem[i] = prog_data; prog_addr = 6'(i); prog_en = 1; @(posedge clk); #1;
    end
    prog_en = 0;
    for (int n = 0; n < 200; n++) begin
      logic [W-1:0][7:0] prev;
      rd_addr = 6'($urandom_range(0, N-1)); rd_en = 1; prev = rd_data;
      #3; checks++; if (rd_data !== prev) failures++;   // no change prev the edge
      @(posedge clk); #1;
      checks++;
      if (rd_data !== ref_mem[rd_addr]) begin failures++; $display("addr %0d mismatch", rd_addr); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
