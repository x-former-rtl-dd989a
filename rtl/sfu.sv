// sfu: special function unit of an AHCT, VUS vector units of VU_LANES lanes
// (64 lanes in all) driven by one operation at a time.
//
// Lane n is lane n % LANES of vector unit n / LANES. All units receive the
// same op and start, so they finish together; done and busy are taken from
// the AND / OR of the units. In the AHCT the 64 lanes match the 64 queries of
// a sequence block (softmax exponentials of one score column) and the 64
// dimensions of a head (normalisation of one output row).
// Timing: as vector_unit (done 1 cycle after start for EXP/ADD, 9 for DIV).
// Unit and lane counts follow the published configuration.
module sfu
  import xformer_pkg::*;
#(
  parameter int unsigned NVU   = VUS,
  parameter int unsigned LANES = VU_LANES
) (
  input  logic                               clk,
  input  logic                               rst_n,
  input  logic                               start,
  input  vu_op_t                             op,
  input  logic [NVU*LANES-1:0][ACC_W-1:0]    a,
  input  logic [NVU*LANES-1:0][ACC_W-1:0]    b,
  output logic                               busy,
  output logic                               done,
  output logic [NVU*LANES-1:0][ACC_W-1:0]    y
);
  logic [NVU-1:0] vu_busy, vu_done;

  for (genvar u = 0; u < NVU; u++) begin : g_vu
    vector_unit #(.LANES(LANES)) u_vu (
      .clk(clk), .rst_n(rst_n), .start(start), .op(op),
      .a(a[u*LANES +: LANES]), .b(b[u*LANES +: LANES]),
      .busy(vu_busy[u]), .done(vu_done[u]), .y(y[u*LANES +: LANES])
    );
  end

  assign busy = |vu_busy;
  assign done = &vu_done;

endmodule
