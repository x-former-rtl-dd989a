// tb_reram_crossbar: self-checking test of the ReRAM crossbar model.
// Programs random 2-bit cells, streams random 1-bit row inputs and compares
// every ADC conversion with an independent column sum (saturated at 255);
// a second phase sets every cell to 3 and every input to 1 so the columns
// exceed the ADC range, and checks the saturation. Also checks the one-cycle
// conversion latency.
module tb_reram_crossbar;
  localparam int ROWS = 128, COLS = 128, ADCS = 2;
  logic clk = 0, prog_en = 0, en = 0;
  logic [6:0] prog_row;
  logic [255:0] prog_data;
  logic [ROWS-1:0] dac_in;
  logic [5:0] adc_sel;
  logic [ADCS-1:0][7:0] adc_out;
  int checks = 0, failures = 0;
  int ref_cell [ROWS][COLS];

  reram_crossbar dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic program_all(input bit all3);
    for (int r = 0; r < ROWS; r++) begin
      for (int c = 0; c < COLS; c++) begin
        ref_cell[r][c] = all3 ? 3 : $urandom_range(0, 3);
        prog_data[2*c +: 2] = 2'(ref_cell[r][c]);
      end
      prog_row = 7'(r); prog_en = 1; @(posedge clk); #1; prog_en = 0;
    end
  endtask

  task automatic convert_and_check(input bit all1);
    for (int s = 0; s < COLS/ADCS; s++) begin
      for (int r = 0; r < ROWS; r++) dac_in[r] = all1 ? 1'b1 : 1'($urandom_range(0, 1));
      adc_sel = 6'(s); en = 1;
      @(posedge clk); #1; en = 0;
      for (int a = 0; a < ADCS; a++) begin
        int sum = 0;
        for (int r = 0; r < ROWS; r++) sum += dac_in[r] * ref_cell[r][s*ADCS + a];
        if (sum > 255) sum = 255;
        checks++;
        if (adc_out[a] !== 8'(sum)) begin
          failures++;
          $display("col %0d: got %0d exp %0d", s*ADCS+a, adc_out[a], sum);
        end
      end
    end
  endtask

  initial begin
    @(posedge clk); #1;
    program_all(0);
    repeat (4) convert_and_check(0);
    program_all(1);
    convert_and_check(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
