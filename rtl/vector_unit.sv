// vector_unit: one vector unit (VU) of the special function unit, LANES lanes
// working in lockstep on the same operation.
//
// Operations (op, latched at start):
//   VU_EXP  y = exp2_q(a)         softmax weight of a score (see xformer_pkg)
//   VU_ADD  y = a + b
//   VU_DIV  y = min(a / b, 255)   normalisation; restoring division that
//                                  produces an 8-bit quotient, b = 0 gives 255
// Timing: EXP and ADD finish one cycle after start (done pulses, y valid);
// DIV takes DATA_W = 8 iteration cycles; done pulses 9 cycles after start.
// y holds its value until the next operation. start is ignored while busy.
// The lane count follows the published configuration; the operation set is
// the one this design's softmax needs (the source lists adders, multipliers,
// division and exponentiation).
module vector_unit
  import xformer_pkg::*;
#(
  parameter int unsigned LANES = VU_LANES
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          start,
  input  vu_op_t                        op,
  input  logic [LANES-1:0][ACC_W-1:0]   a,
  input  logic [LANES-1:0][ACC_W-1:0]   b,
  output logic                          busy,
  output logic                          done,
  output logic [LANES-1:0][ACC_W-1:0]   y
);
  localparam int unsigned W = ACC_W + DATA_W;

  logic [LANES-1:0][W-1:0]     rem;
  logic [LANES-1:0][ACC_W-1:0] den;
  logic [$clog2(DATA_W)-1:0]   k;      // current quotient bit

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; y <= '0; rem <= '0; den <= '0; k <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        unique case (op)
          VU_EXP: begin
            for (int l = 0; l < LANES; l++) y[l] <= ACC_W'(exp2_q(a[l][SCORE_W-1:0]));
            done <= 1'b1;
          end
          VU_ADD: begin
            for (int l = 0; l < LANES; l++) y[l] <= a[l] + b[l];
            done <= 1'b1;
          end
          default: begin  // VU_DIV
            for (int l = 0; l < LANES; l++) begin
              rem[l] <= W'(a[l]);
              den[l] <= b[l];
            end
            y <= '0; k <= 3'(DATA_W - 1); busy <= 1'b1;
          end
        endcase
      end else if (busy) begin
        for (int l = 0; l < LANES; l++) begin
          automatic logic [W-1:0] d = W'(den[l]) << k;
          if (rem[l] >= d) begin
            rem[l] <= rem[l] - d;
            y[l][int'(k)] <= 1'b1;
          end
        end
        k <= k - 1'b1;
        if (k == 0) begin busy <= 1'b0; done <= 1'b1; end
      end
    end
  end

endmodule
