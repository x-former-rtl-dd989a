// tb_sram_imc_macro: writes random rows into the 8T-SRAM macro model, applies
// random row inputs and checks every column count against an independent
// count, plus the one-cycle latency; also rewrites rows and checks that the
// old contents are gone.
module tb_sram_imc_macro;
  localparam int R = 64, C = 128;
  logic clk = 0, wr_en = 0, en = 0;
  logic [5:0] wr_row; logic [C-1:0] wr_data; logic [R-1:0] in_bits;
  logic [C-1:0][6:0] pop;
  logic [C-1:0] ref_mem [R];
  int checks = 0, failures = 0;

  sram_imc_macro #(.ROWS(R), .COLS(C)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic write_rows(input int n);
    for (int k = 0; k < n; k++) begin
      wr_row = 6'($urandom_range(0, R-1));
      wr_data = {$urandom, $urandom, $urandom, $urandom};
      ref_mem[wr_row] = wr_data; wr_en = 1; @(posedge clk); #1; wr_en = 0;
    end
  endtask

  task automatic compute(input int n);
    for (int k = 0; k < n; k++) begin
      in_bits = {$urandom, $urandom}; en = 1; @(posedge clk); #1; en = 0;
      for (int c = 0; c < C; c++) begin
        int cnt; cnt = 0;
        for (int r = 0; r < R; r++) cnt += in_bits[r] & ref_mem[r][c];
        checks++;
        if (pop[c] != 7'(cnt)) begin failures++; if (failures < 10) $display("c%0d got %0d exp %0d", c, pop[c], cnt); end
      end
    end
  endtask

  initial begin
    @(posedge clk); #1;
    for (int r = 0; r < R; r++) begin
      wr_row = 6'(r); wr_data = {$urandom, $urandom, $urandom, $urandom};
      ref_mem[r] = wr_data; wr_en = 1; @(posedge clk); #1; wr_en = 0;
    end
    compute(10);
    write_rows(40);
    compute(10);
    in_bits = '1; en = 1; @(posedge clk); #1; en = 0;   // all rows active
    for (int c = 0; c < C; c++) begin
      int cnt; cnt = 0;
      for (int r = 0; r < R; r++) cnt += ref_mem[r][c];
      checks++; if (pop[c] != 7'(cnt)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
