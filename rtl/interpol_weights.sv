// interpol_weights: linear-interpolation weight of one grid corner.
//
// For corner bits c_d and cell fractions f_d the weight is the product over
// the active dimensions of (c_d ? f_d : 1 - f_d), i.e. the bilinear (2-D) or
// trilinear (3-D) weight. Terms are Q1.16; after each multiply the product
// is truncated back to Q1.16. The weights of all corners of a cell sum to
// 1.0 up to truncation. Purely combinational.
// Linear interpolation of corner features follows the architecture; the
// fixed-point format and truncation are this design's choice.
// Lint note: the low 16 product bits are dropped by the truncation and the
// top bit can only be set for 1.0 x 1.0, so those bits are unused on purpose.
module interpol_weights
  import nfp_pkg::*;
(
  input  logic [1:0]            dims,
  input  frac_t [MAX_DIMS-1:0]  frac,
  input  logic [MAX_DIMS-1:0]   corner,
  output logic [WGT_W-1:0]      weight
);
  always_comb begin
    logic [WGT_W-1:0] term;
    logic [2*WGT_W-1:0] p;
    weight = WGT_W'(17'h10000);
    term   = '0;
    p      = '0;
    for (int d = 0; d < MAX_DIMS; d++) begin
      if (d < int'(dims)) begin
        term   = corner[d] ? {1'b0, frac[d]} : (17'h10000 - {1'b0, frac[d]});
        p      = weight * term;
        weight = p[WGT_W+15:16];
      end
    end
  end
endmodule
