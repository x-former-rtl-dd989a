// tb_sfu: drives all 64 lanes of the SFU (16 vector units x 4 lanes) with
// random scores and division operands and checks each lane against an
// independent model, so a lane wired to the wrong unit or a unit that does
// not take part shows; checks the EXP (1 cycle) and DIV (9 cycles) timing.
module tb_sfu;
  import xformer_pkg::*;
  localparam int N = 64;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  vu_op_t op;
  logic [N-1:0][31:0] a, b, y;
  int checks = 0, failures = 0;

  sfu dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic longint exp_ref(input longint s);
    longint x = s >> 17;
    if (x > 31) x = 31;
    return longint'($floor(128.0 * (2.0 ** (real'(x % 4) / 4.0)) + 0.5)) << (x / 4);
  endfunction

  task automatic do_op(input vu_op_t o, input int lat);
    int cyc;
    op = o; start = 1; @(posedge clk); #1; start = 0; cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks++; if (cyc != lat) begin failures++; $display("latency %0d", cyc); end
  endtask

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      for (int l = 0; l < N; l++) a[l] = 32'($urandom_range(0, (1 << 22) - 1));
      do_op(VU_EXP, 1);
      for (int l = 0; l < N; l++) begin checks++; if (y[l] != 32'(exp_ref(a[l]))) failures++; end
      for (int l = 0; l < N; l++) begin
        b[l] = 32'($urandom_range(1, 1 << 20));
        a[l] = 32'($urandom_range(0, 255)) * b[l] + 32'($urandom_range(0, 1000));
      end
      do_op(VU_DIV, 9);
      for (int l = 0; l < N; l++) begin
        longint q; q = longint'(a[l]) / longint'(b[l]); if (q > 255) q = 255;
        checks++; if (y[l] != 32'(q)) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
