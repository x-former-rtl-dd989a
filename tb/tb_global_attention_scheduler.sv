// tb_global_attention_scheduler: runs the scheduler for 1..4 blocks with a
// model tile that takes a random time per pass and a model projection engine
// that makes blocks ready at random times. Checks the query-major pass order,
// the first/last flags, that no pass starts before its blocks are ready, that
// stall is seen, and the final done pulse.
module tb_global_attention_scheduler;
  import xformer_pkg::*;
  logic clk = 0, rst_n = 0, start = 0, pass_done = 0;
  logic [3:0] nblocks, blocks_ready, qb, kb;
  logic pass_start, first, last, stall, busy, done;
  int checks = 0, failures = 0, stalls = 0;

  global_attention_scheduler dut (.*);
  always #5 clk = ~clk;
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (stall) stalls++;

  initial begin
    repeat (2) @(posedge clk); #1 rst_n = 1;
    for (int nb = 1; nb <= 4; nb++) begin
      int eq, ek; eq = 0; ek = 0;
      nblocks = 4'(nb); blocks_ready = 0;
      start = 1; @(posedge clk); #1; start = 0;
      fork
        begin : producer
          for (int b = 1; b <= nb; b++) begin repeat ($urandom_range(5, 60)) @(posedge clk); #1; blocks_ready = 4'(b); end
        end
        begin : consumer
          for (int p = 0; p < nb*nb; p++) begin
            while (!pass_start) @(negedge clk);
            checks++;
            if (qb != 4'(eq) || kb != 4'(ek) || first != (ek == 0) || last != (ek == nb-1)) begin
              failures++; $display("pass %0d: qb %0d kb %0d", p, qb, kb);
            end
            checks++;
            if (blocks_ready <= ((eq > ek) ? eq : ek)) begin failures++; $display("started early"); end
            repeat ($urandom_range(1, 20)) @(negedge clk);
            pass_done = 1; @(negedge clk); pass_done = 0;
            ek++; if (ek == nb) begin ek = 0; eq++; end
            if (p == nb*nb-1) begin checks++; if (!done) failures++; end
          end
        end
      join
      repeat (3) @(posedge clk); #1;
      checks++; if (busy) failures++;
    end
    checks++; if (stalls == 0) begin failures++; $display("no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
