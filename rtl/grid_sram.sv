// grid_sram: on-chip lookup table of one IE engine. It caches the feature
// table of one resolution level: DEPTH words of two signed 8-bit features.
//
// Modelled as a synchronous memory array with one write port (loaded over
// the configuration bus before a frame) and one read port with one cycle of
// latency (rdata is valid the cycle after raddr is presented).
// The size, 2^19 words x 16 bit = 1 MB, follows the architecture's 1 MB per
// IE engine; the word layout and the two ports are this design's choice. A
// silicon implementation would map this onto SRAM macros.
module grid_sram
  import nfp_pkg::*;
#(
  parameter int unsigned DEPTH = 1 << LOG2_T_MAX
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  grid_word_t               wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output grid_word_t               rdata
);
  grid_word_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
