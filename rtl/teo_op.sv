// teo_op: Teager energy operator of one sample, truncated.
//
// Computes T[k] = X[k]^2 - X[k+1]*X[k-1] at full precision (2*W+1 bits,
// which cannot overflow) and keeps the bits from SHIFT upwards, i.e. an
// arithmetic right shift by SHIFT, saturated to OUT_W bits. The operator is
// the paper's Eq. 1; the choice of which bits the truncation keeps is this
// design's own. Purely combinational.
module teo_op #(
  parameter int unsigned W     = 7,
  parameter int unsigned OUT_W = 8,
  parameter int unsigned SHIFT = 6
) (
  input  logic signed [W-1:0]     x_prev,  // X[k-1]
  input  logic signed [W-1:0]     x_cur,   // X[k]
  input  logic signed [W-1:0]     x_next,  // X[k+1]
  output logic signed [OUT_W-1:0] teo      // truncated T{X}[k]
);
  localparam int unsigned FW = 2 * W + 1;
  localparam logic signed [FW-1:0] OMAX = FW'((1 << (OUT_W - 1)) - 1);
  localparam logic signed [FW-1:0] OMIN = -FW'(1 << (OUT_W - 1));

  logic signed [FW-1:0] sq, xprod, full, shifted;

  always_comb begin
    sq      = FW'(x_cur) * FW'(x_cur);
    xprod   = FW'(x_next) * FW'(x_prev);
    full    = sq - xprod;
    shifted = full >>> SHIFT;
    if (shifted > OMAX)      teo = OMAX[OUT_W-1:0];
    else if (shifted < OMIN) teo = OMIN[OUT_W-1:0];
    else                     teo = shifted[OUT_W-1:0];
  end
endmodule
