// tb_vector_unit: checks the three VU operations on random operands against
// independent models: the base-2 exponential (computed here with real
// arithmetic, 128*2^(x/4) rounded), addition, and saturating 8-bit division
// (including divide by zero); checks EXP/ADD finish in 1 cycle and DIV in 9.
module tb_vector_unit;
  import xformer_pkg::*;
  localparam int L = 4;
  logic clk = 0, rst_n = 0, start = 0, busy, done;
  vu_op_t op;
  logic [L-1:0][31:0] a, b, y;
  int checks = 0, failures = 0;

  vector_unit #(.LANES(L)) dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  function automatic longint exp_ref(input longint s);
    longint x = s >> 17;
    if (x > 31) x = 31;
    return longint'($floor(128.0 * (2.0 ** (real'(x % 4) / 4.0)) + 0.5)) << (x / 4);
  endfunction

  task automatic do_op(input vu_op_t o, input int lat);
    int cyc = 0;
    op = o; start = 1; @(posedge clk); #1; start = 0; cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks++; if (cyc != lat) begin failures++; $display("op %0d latency %0d", o, cyc); end
  endtask

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      for (int l = 0; l < L; l++) a[l] = 32'($urandom_range(0, (1 << 22) - 1));
      do_op(VU_EXP, 1);
      for (int l = 0; l < L; l++) begin checks++; if (y[l] != 32'(exp_ref(a[l]))) begin failures++; $display("exp %0d -> %0d", a[l], y[l]); end end
      for (int l = 0; l < L; l++) begin a[l] = $urandom; b[l] = $urandom; end
      do_op(VU_ADD, 1);
      for (int l = 0; l < L; l++) begin checks++; if (y[l] != a[l] + b[l]) failures++; end
      for (int l = 0; l < L; l++) begin
        b[l] = 32'($urandom_range(0, 1 << 20));
        if (l == 3 && n % 10 == 0) b[l] = 0;
        a[l] = 32'($urandom_range(0, 300)) * b[l] + ((l == 0) ? 0 : 32'($urandom_range(0, 1000)));  // lane 0: exact quotient
      end
      do_op(VU_DIV, 9);
      for (int l = 0; l < L; l++) begin
        longint q; q = (b[l] == 0) ? 255 : longint'(a[l]) / longint'(b[l]);
        if (q > 255) q = 255;
        checks++; if (y[l] != 32'(q)) begin failures++; $display("div %0d/%0d -> %0d exp %0d", a[l], b[l], y[l], q); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
