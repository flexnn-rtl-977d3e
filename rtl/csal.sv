// csal: two-sided combined sparsity acceleration logic of one VPE.
//
// Every bit of a sparsity bitmap marks a non-zero byte of the dense IF or FL
// vector. A MAC is only needed where both operands are non-zero, so the
// combined sparsity bitmap (CSB) of a lane is the bitwise AND of the IF and
// FL bitmaps it is fed (the paper's worked example, IF 01110110 and
// FL 10110100 giving 00110100, is exactly this AND).
//
// Template selection follows the paper's VPE figures: in the vector x vector
// template lane i combines IF subbank i with FL subbank i; in the matrix x
// matrix template every lane combines the single IF subbank chosen by
// if_sel with its own FL subbank.
//
// Purely combinational; no clock.
module csal #(
  parameter int LANES = flexnn_pkg::LANES,
  parameter int BMP_W = flexnn_pkg::SUB_BYTES
) (
  input  logic [LANES-1:0][BMP_W-1:0] if_bmp,
  input  logic [LANES-1:0][BMP_W-1:0] fl_bmp,
  input  logic                        mxm,
  input  logic [$clog2(LANES)-1:0]    if_sel,
  output logic [LANES-1:0][BMP_W-1:0] lane_if_bmp, // IF bitmap seen by each lane
  output logic [LANES-1:0][BMP_W-1:0] csb
);
  always_comb begin
    for (int i = 0; i < LANES; i++) begin
      lane_if_bmp[i] = mxm ? if_bmp[if_sel] : if_bmp[i];
      csb[i]         = lane_if_bmp[i] & fl_bmp[i];
    end
  end
endmodule
