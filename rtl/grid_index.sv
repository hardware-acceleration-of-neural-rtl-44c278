// grid_index: computes the lookup-table index of one corner of the grid cell
// that holds an input.
//
// The corner's coordinates are the cell position plus the corner's bit d in
// each dimension d. In hash mode (multi-resolution hashgrid) the index is
//   (c0*P0 ^ c1*P1 ^ c2*P2) mod T
// with 32-bit wrap-around products; in dense mode (multi/low resolution
// densegrid) it is the 1:1 row-major index
//   (c0 + c1*R + c2*R*R) mod T,  R = vertices per axis.
// The table size T is a power of two (2^log2_t), so mod T is a mask of the
// low bits, never a divider. For 2-D inputs (dims=2) the third term is left
// out. Purely combinational.
// Hash/dense selection, the hash of the form above and the power-of-two
// modulo follow the architecture; the prime values are those of the
// published hash encoding, and R and the dense index order are this
// design's choice.
module grid_index
  import nfp_pkg::*;
(
  input  enc_mode_e              mode,
  input  logic [1:0]             dims,
  input  logic [4:0]             log2_t,
  input  logic [15:0]            res,          // vertices per axis (dense)
  input  gint_t [MAX_DIMS-1:0]   pos_int,
  input  logic [MAX_DIMS-1:0]    corner,
  output logic [LOG2_T_MAX-1:0]  index
);
  logic [31:0] c [MAX_DIMS];
  logic [31:0] h, mask;

  always_comb begin
    for (int d = 0; d < MAX_DIMS; d++) c[d] = 32'(pos_int[d]) + 32'(corner[d]);
    if (mode == ENC_HASH) begin
      h = (c[0] * HASH_P0) ^ (c[1] * HASH_P1);
      if (dims == 2'd3) h = h ^ (c[2] * HASH_P2);
    end else begin
      h = c[0] + c[1] * 32'(res);
      if (dims == 2'd3) h = h + c[2] * 32'(res) * 32'(res);
    end
    mask  = (32'd1 << log2_t) - 32'd1;
    index = LOG2_T_MAX'(h & mask);
  end
endmodule
