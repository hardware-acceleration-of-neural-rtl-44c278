// pos_fract: converts normalized input coordinates into absolute grid
// coordinates for one resolution level.
//
// Each coordinate (Q0.16 in [0,1)) is multiplied by the grid scale (Q16.16);
// the Q16.32 product is split into the integer grid cell (bits 47:32) and the
// position inside the cell (bits 31:16, Q0.16). Purely combinational; the
// IE engine registers the result.
// Multiplying by the grid scale follows the architecture; the formats and
// the plain product (no half-cell offset) are this design's choice.
// Lint note: the low 16 product bits are below the fraction's precision and
// are dropped on purpose.
module pos_fract
  import nfp_pkg::*;
(
  input  coord_vec_t                    coord,
  input  logic [SCALE_W-1:0]            scale,
  output gint_t [MAX_DIMS-1:0]          pos_int,
  output frac_t [MAX_DIMS-1:0]          pos_frac
);
  always_comb begin
    for (int d = 0; d < MAX_DIMS; d++) begin
      logic [47:0] p;
      p = 48'(coord[d]) * 48'(scale);
      pos_int[d]  = p[47:32];
      pos_frac[d] = p[31:16];
    end
  end
endmodule
