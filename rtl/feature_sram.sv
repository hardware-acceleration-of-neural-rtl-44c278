// feature_sram: on-chip buffer of MLP feature vectors (one MAC_DIM-wide
// activation vector per word). The MLP engine uses three: the input memory
// the IE engines write the encoded inputs into, and two buffers that hold
// the features of alternate hidden layers.
//
// One write port and one read port; the read is synchronous, rdata holds
// mem[raddr] from the cycle after raddr is presented and stays stable while
// raddr does not change.
// A small dedicated SRAM for hidden-layer features follows the architecture;
// the three-buffer split and the sizes are this design's choice.
module feature_sram
  import nfp_pkg::*;
#(
  parameter int unsigned DEPTH = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  act_vec_t                 wdata,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output act_vec_t                 rdata
);
  act_vec_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
