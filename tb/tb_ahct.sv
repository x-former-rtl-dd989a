// tb_ahct: one attention head compute tile on a 128-token sequence (two
// sequence blocks). The testbench plays the input buffer: it answers every
// read request one cycle later from its own Q/K/V arrays. For each query block
// it runs the two passes (key block 0 with first, key block 1 with last) and
// checks every emitted row against an independent model:
//   s = q.k, e = round(128*2^(x/4)) with x = min(s >> 17, 31),
//   out[i][d] = min(floor(sum_j e*v[j][d] / sum_j e), 255) over all 128 keys.
// It also checks the row order, that Q is read only on first passes, and
// the pass cycle counts: 2244 for a first pass, 2819 for a last pass.
module tb_ahct;
  import xformer_pkg::*;
  localparam int T = 128, D = 64;
  logic clk = 0, rst_n = 0, start = 0, first = 0, last = 0, busy, done, rd_req, out_valid;
  rd_mode_t rd_mode; logic [5:0] rd_idx, out_row;
  logic [63:0][7:0] rd_data, out_vec;
  int Q [T][D], K [T][D], V [T][D];
  int qb_cur = 0, kb_cur = 0, rows_seen = 0, qreads = 0;
  int checks = 0, failures = 0;
  longint ref_out [T][D];

  ahct dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (400000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // input buffer model
  always @(posedge clk) if (rd_req) begin
    for (int e = 0; e < 64; e++)
      unique case (rd_mode)
        RD_QT: rd_data[e] <= 8'(Q[qb_cur*64 + e][rd_idx]);
        RD_K:  rd_data[e] <= 8'(K[kb_cur*64 + rd_idx][e]);
        default: rd_data[e] <= 8'(V[kb_cur*64 + rd_idx][e]);
      endcase
    if (rd_mode == RD_QT) qreads++;
  end

  // output checker
  always @(posedge clk) if (rst_n && out_valid) begin
    checks++; if (int'(out_row) != rows_seen % 64) failures++;
    for (int d = 0; d < D; d++) begin
      checks++;
      if (out_vec[d] != 8'(ref_out[qb_cur*64 + out_row][d])) begin
        failures++; if (failures < 10) $display("q%0d d%0d got %0d exp %0d", qb_cur*64+out_row, d, out_vec[d], ref_out[qb_cur*64+out_row][d]);
      end
    end
    rows_seen++;
  end

  function automatic longint exp_ref(input longint s);
    longint x = s >> 17;
    if (x > 31) x = 31;
    return longint'($floor(128.0 * (2.0 ** (real'(x % 4) / 4.0)) + 0.5)) << (x / 4);
  endfunction

  task automatic pass(input int qb, input int kb, input int exp_cyc);
    int cyc, qr;
    qb_cur = qb; kb_cur = kb; first = (kb == 0); last = (kb == 1); qr = qreads;
    start = 1; @(posedge clk); #1; start = 0; cyc = 1;
    while (!done) begin @(posedge clk); #1; cyc++; end
    checks++; if (cyc != exp_cyc) begin failures++; $display("pass %0d/%0d took %0d", qb, kb, cyc); end
    checks++; if ((qreads - qr) != (kb == 0 ? 64 : 0)) begin failures++; $display("Q reads %0d", qreads - qr); end
  endtask

  initial begin
    for (int t = 0; t < T; t++)
      for (int d = 0; d < D; d++) begin
        Q[t][d] = $urandom_range(0, 255); K[t][d] = $urandom_range(0, 255); V[t][d] = $urandom_range(0, 255);
      end
    for (int i = 0; i < T; i++) begin
      longint den, num [D];
      den = 0; for (int d = 0; d < D; d++) num[d] = 0;
      for (int j = 0; j < T; j++) begin
        longint s, e;
        s = 0; for (int d = 0; d < D; d++) s += longint'(Q[i][d]) * K[j][d];
        e = exp_ref(s); den += e;
        for (int d = 0; d < D; d++) num[d] += e * V[j][d];
      end
      for (int d = 0; d < D; d++) begin ref_out[i][d] = num[d] / den; if (ref_out[i][d] > 255) ref_out[i][d] = 255; end
    end
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int qb = 0; qb < 2; qb++) begin
      pass(qb, 0, 2244);
      pass(qb, 1, 2819);
    end
    checks++; if (rows_seen != T) begin failures++; $display("rows %0d", rows_seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
