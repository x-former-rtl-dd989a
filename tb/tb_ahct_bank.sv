// tb_ahct_bank: loads random 8-bit operands into a bank (16 elements per row,
// 64 rows), streams random 8-bit and 16-bit input vectors bit-serially and
// checks every accumulator against the exact dot products sum_r in[r]*m[r][e];
// also checks that acc_clr restarts the accumulation and that the result is
// ready two cycles after the last streamed bit.
module tb_ahct_bank;
  import xformer_pkg::*;
  localparam int R = 64, E = 16;
  logic clk = 0, rst_n = 0, wr_en = 0, acc_clr = 0, en = 0;
  logic [5:0] wr_row; logic [E*8-1:0] wr_data; logic [R-1:0] in_bits; logic [3:0] bit_idx;
  logic [E-1:0][31:0] acc;
  int m [R][E]; int v [R];
  int checks = 0, failures = 0;

  ahct_bank #(.ROWS(R), .ELEMS(E)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(input int bits);
    int maxv = (1 << bits) - 1;
    for (int r = 0; r < R; r++) v[r] = $urandom_range(0, maxv);
    acc_clr = 1; @(posedge clk); #1; acc_clr = 0;
    for (int b = 0; b < bits; b++) begin
      for (int r = 0; r < R; r++) in_bits[r] = 1'((v[r] >> b) & 1);
      bit_idx = 4'(b); en = 1; @(posedge clk); #1;
    end
    en = 0;
    @(posedge clk); #1;     // second cycle after the last bit
    for (int e = 0; e < E; e++) begin
      longint s = 0;
      for (int r = 0; r < R; r++) s += longint'(v[r]) * m[r][e];
      checks++;
      if (acc[e] != 32'(s)) begin failures++; if (failures < 10) $display("e%0d got %0d exp %0d", e, acc[e], s); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int r = 0; r < R; r++) begin
      for (int e = 0; e < E; e++) begin m[r][e] = $urandom_range(0, 255); wr_data[e*8 +: 8] = 8'(m[r][e]); end
      wr_row = 6'(r); wr_en = 1; @(posedge clk); #1; wr_en = 0;
    end
    repeat (5) run(8);
    repeat (5) run(16);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
