// global_attention_scheduler: orders the work of the attention tiles under
// the sequence-blocking dataflow and sends them their control vector
// (pass start, block indices, first/last flags).
//
// For a sequence of nblocks blocks of SB tokens it issues the passes
// (qb, kb) query-block-major: qb = 0..nblocks-1, and for each qb every key
// block kb = 0..nblocks-1. first marks kb = 0 (write the query block, clear
// the accumulators), last marks kb = nblocks-1 (normalise and emit). A pass
// needs Q of block qb and K, V of block kb, so it waits until
// blocks_ready > max(qb, kb); while it waits, stall is high. Because the
// Projection Engine produces blocks in order, the first query block's passes
// run while later blocks are still being projected: the two engines overlap.
// Interface: start (with nblocks >= 1) begins; pass_start pulses with qb/kb/
// first/last valid; the next pass is issued after pass_done; done pulses
// after the last pass. The overlap idea and SB follow the source; the pass
// order and the readiness rule are this design's own.
module global_attention_scheduler
  import xformer_pkg::*;
#(
  parameter int unsigned MAXB = SL_MAX / SB,
  localparam int unsigned BW  = $clog2(MAXB + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [BW-1:0]   nblocks,
  input  logic [BW-1:0]   blocks_ready,
  output logic            pass_start,
  output logic [BW-1:0]   qb,
  output logic [BW-1:0]   kb,
  output logic            first,
  output logic            last,
  input  logic            pass_done,
  output logic            stall,
  output logic            busy,
  output logic            done
);
  typedef enum logic [1:0] {G_IDLE, G_WAIT, G_RUN} gst_t;
  gst_t          state;
  logic [BW-1:0] nb;

  wire [BW-1:0] need  = (qb > kb) ? qb : kb;
  wire          ready = (blocks_ready > need);

  assign pass_start = (state == G_WAIT) && ready;
  assign stall      = (state == G_WAIT) && !ready;
  assign first      = (kb == '0);
  assign last       = (kb == nb - 1'b1);
  assign busy       = (state != G_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= G_IDLE; nb <= '0; qb <= '0; kb <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        G_IDLE: if (start && nblocks != '0) begin
          nb <= nblocks; qb <= '0; kb <= '0; state <= G_WAIT;
        end
        G_WAIT: if (ready) state <= G_RUN;
        G_RUN: if (pass_done) begin
          if (kb == nb - 1'b1) begin
            kb <= '0;
            if (qb == nb - 1'b1) begin state <= G_IDLE; done <= 1'b1; end
            else begin qb <= qb + 1'b1; state <= G_WAIT; end
          end else begin
            kb <= kb + 1'b1; state <= G_WAIT;
          end
        end
        default: state <= G_IDLE;
      endcase
    end
  end

endmodule
