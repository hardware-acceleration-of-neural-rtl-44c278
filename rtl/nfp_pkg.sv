// nfp_pkg: shared constants, number formats and types of the neural fields
// processor (NFP) and the neural graphics processing cluster built from it.
//
// Number formats (all chosen by this design; the source architecture does not
// specify any):
//   coordinate  unsigned Q0.16, a normalized position in [0,1)
//   grid scale  unsigned Q16.16
//   fraction    unsigned Q0.16, position inside a grid cell
//   weight      unsigned Q1.16, interpolation weight in [0,1]
//   feature     signed 8 bit, FEAT_FRAC fraction bits, two features per
//               grid_sram word (16 bit word, so 2^19 words fill 1 MB)
//   activation  signed Q8.8 (16 bit), MLP inputs, hidden features, outputs
//   MLP weight  signed Q8.8 (16 bit)
// The architecture's numbers kept here: 16 IE engines, 64x64 MAC grid,
// 2^19-entry lookup table per engine (1 MB), 16 levels at most.
package nfp_pkg;

  localparam int unsigned N_IE      = 16;   // IE engines per NFP
  localparam int unsigned MAC_DIM   = 64;   // MAC grid is MAC_DIM x MAC_DIM
  localparam int unsigned MAX_DIMS  = 3;    // x,y,z (GIA uses 2)
  localparam int unsigned N_FEAT    = 2;    // features per table entry (F)
  localparam int unsigned LOG2_T_MAX = 19;  // table entries per engine = 2^19

  localparam int unsigned COORD_W   = 16;
  localparam int unsigned SCALE_W   = 32;   // Q16.16
  localparam int unsigned FRAC_W    = 16;
  localparam int unsigned WGT_W     = 17;   // Q1.16 interpolation weight
  localparam int unsigned FEAT_W    = 8;
  localparam int unsigned FEAT_FRAC = 6;
  localparam int unsigned ACT_W     = 16;
  localparam int unsigned ACT_FRAC  = 8;
  localparam int unsigned MW_W      = 16;   // MLP weight width
  localparam int unsigned MW_FRAC   = 8;
  localparam int unsigned MAX_LAYERS = 8;   // weight matrices held on chip

  // Primes of the spatial hash h(x) = (x0*P0 ^ x1*P1 ^ x2*P2) mod T.
  localparam logic [31:0] HASH_P0 = 32'd1;
  localparam logic [31:0] HASH_P1 = 32'd2654435761;
  localparam logic [31:0] HASH_P2 = 32'd805459861;

  typedef logic [COORD_W-1:0]            coord_t;
  typedef coord_t [MAX_DIMS-1:0]         coord_vec_t;
  typedef logic [FRAC_W-1:0]             frac_t;
  typedef logic [15:0]                   gint_t;      // integer grid position
  typedef logic signed [ACT_W-1:0]       act_t;
  typedef logic [MAC_DIM-1:0][ACT_W-1:0]  act_vec_t;   // elements are act_t bit patterns
  typedef logic signed [MW_W-1:0]        mw_t;
  typedef logic [MAC_DIM-1:0][MW_W-1:0]   mw_row_t;    // elements are mw_t bit patterns
  typedef logic [N_FEAT*FEAT_W-1:0]      grid_word_t;

  typedef enum logic {ENC_DENSE = 1'b0, ENC_HASH = 1'b1} enc_mode_e;

  // Run-time configuration of one NFP, written over the configuration bus.
  typedef struct packed {
    enc_mode_e   mode;        // hash or dense index
    logic [4:0]  levels;      // resolution levels L (divides 16)
    logic [1:0]  dims;        // 2 or 3 input dimensions
    logic [3:0]  n_layers;    // weight matrices of the MLP (1..MAX_LAYERS)
    logic [15:0] base_res;    // Nmin
    logic [31:0] growth;      // b, Q16.16
    logic [4:0]  log2_t;      // table size T = 2^log2_t
    logic [6:0]  batch;       // inputs per MLP batch
  } nfp_cfg_t;

  // Configuration bus regions (cfg_addr[31:28]).
  localparam logic [3:0] REG_REGION  = 4'h0;
  localparam logic [3:0] WGT_REGION  = 4'h1;
  localparam logic [3:0] GRID_REGION = 4'h2;
  // Register offsets (cfg_addr[7:0]) in REG_REGION.
  localparam logic [7:0] REG_MODE   = 8'h00;
  localparam logic [7:0] REG_LEVELS = 8'h01;
  localparam logic [7:0] REG_DIMS   = 8'h02;
  localparam logic [7:0] REG_LAYERS = 8'h03;
  localparam logic [7:0] REG_BASE   = 8'h04;
  localparam logic [7:0] REG_GROWTH = 8'h05;
  localparam logic [7:0] REG_LOG2T  = 8'h06;
  localparam logic [7:0] REG_BATCH  = 8'h07;
  localparam logic [7:0] REG_APPLY  = 8'h08;   // recompute grid scales

  // One input sample: normalized coordinates and an end-of-stream mark.
  typedef struct packed {
    coord_vec_t coord;
    logic       last;
  } sample_t;

endpackage
