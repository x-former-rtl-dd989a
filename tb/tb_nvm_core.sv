// tb_nvm_core: self-checking test of one Projection Engine core.
// Programs six crossbars with random 8-bit weights (bit-sliced into 2-bit
// cells), runs several random input vectors and compares all 192 outputs
// with a reference that forms, for every input bit-plane and weight slice,
// the column sum (saturated at 255 like the ADC) and shifts it into place.
// A run with small inputs and weights is also compared with the exact matrix
// product. Checks the start-to-done latency of 513 cycles.
module tb_nvm_core;
  import xformer_pkg::*;
  localparam int X = 6, R = 128, K = 32;
  logic clk = 0, rst_n = 0, prog_en = 0, start = 0, busy, done;
  logic [2:0] prog_xbar; logic [6:0] prog_row; logic [255:0] prog_data;
  logic [R-1:0][7:0] x_in;
  logic [X*K-1:0][CORE_ACC_W-1:0] y_out;
  int checks = 0, failures = 0;
  int w [X][R][K];

  nvm_core dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic program_w(input int maxw);
    for (int x = 0; x < X; x++)
      for (int r = 0; r < R; r++) begin
        for (int k = 0; k < K; k++) begin
          w[x][r][k] = $urandom_range(0, maxw);
          prog_data[k*8 +: 8] = 8'(w[x][r][k]);   // cell 4k+s = bits [2s+1:2s]
        end
        prog_xbar = 3'(x); prog_row = 7'(r); prog_en = 1; @(posedge clk); #1; prog_en = 0;
      end
  endtask

  task automatic run(input int maxx, input bit exact);
    int cyc = 0;
    for (int r = 0; r < R; r++) x_in[r] = 8'($urandom_range(0, maxx));
    start = 1; @(posedge clk); #1; start = 0;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks++;
    if (cyc != 513) begin failures++; $display("latency %0d", cyc); end
    for (int x = 0; x < X; x++)
      for (int k = 0; k < K; k++) begin
        longint ref_y = 0;
        for (int b = 0; b < 8; b++)
          for (int s = 0; s < 4; s++) begin
            int cs = 0;
            for (int r = 0; r < R; r++) cs += x_in[r][b] * ((w[x][r][k] >> (2*s)) & 3);
            if (!exact && cs > 255) cs = 255;
            ref_y += longint'(cs) << (b + 2*s);
          end
        checks++;
        if (y_out[x*K + k] != CORE_ACC_W'(ref_y)) begin
          failures++;
          if (failures < 10) $display("x%0d k%0d got %0d exp %0d", x, k, y_out[x*K+k], ref_y);
        end
      end
  endtask

  initial begin
    repeat (3) @(posedge clk); #1 rst_n = 1;
    program_w(255);
    repeat (3) run(255, 0);
    program_w(40);             // column sums stay below the ADC range
    run(255, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
