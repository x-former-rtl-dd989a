// tb_block_seq_accumulator: accumulates random softmax-weight columns and
// output rows over several simulated key blocks, mixing denominator and
// numerator updates in the same cycle, and compares every stored value with
// a reference model; then checks that clr empties it.
module tb_block_seq_accumulator;
  import xformer_pkg::*;
  localparam int R = 64, D = 64;
  logic clk = 0, rst_n = 0, clr = 0, den_add_en = 0, num_add_en = 0;
  logic [R-1:0][15:0] den_add; logic [5:0] num_row, rd_row;
  logic [D-1:0][31:0] num_add, rd_num; logic [31:0] rd_den;
  longint ref_num [R][D]; longint ref_den [R];
  int checks = 0, failures = 0;

  block_seq_accumulator dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic check_all();
    for (int i = 0; i < R; i++) begin
      rd_row = 6'(i); #1;
      checks++; if (rd_den != 32'(ref_den[i])) failures++;
      for (int d = 0; d < D; d++) begin checks++; if (rd_num[d] != 32'(ref_num[i][d])) failures++; end
    end
  endtask

  initial begin
    for (int i = 0; i < R; i++) begin ref_den[i] = 0; for (int d = 0; d < D; d++) ref_num[i][d] = 0; end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int blk = 0; blk < 4; blk++) begin
      for (int k = 0; k < 80; k++) begin
        den_add_en = 1'($urandom_range(0, 1)); num_add_en = 1'($urandom_range(0, 1));
        for (int i = 0; i < R; i++) den_add[i] = 16'($urandom);
        num_row = 6'($urandom_range(0, R-1));
        for (int d = 0; d < D; d++) num_add[d] = 32'($urandom_range(0, 1 << 24));
        if (den_add_en) for (int i = 0; i < R; i++) ref_den[i] += den_add[i];
        if (num_add_en) for (int d = 0; d < D; d++) ref_num[num_row][d] += num_add[d];
        @(posedge clk); #1;
      end
      den_add_en = 0; num_add_en = 0;
      check_all();
    end
    clr = 1; @(posedge clk); #1; clr = 0;
    for (int i = 0; i < R; i++) begin ref_den[i] = 0; for (int d = 0; d < D; d++) ref_num[i][d] = 0; end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
