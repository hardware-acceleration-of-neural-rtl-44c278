// weight_sram: on-chip store of the MLP weight matrices, LAYERS matrices of
// MAC_DIM x MAC_DIM signed Q8.8 weights. Row r of matrix l (the weights of
// output neuron r) is word l*MAC_DIM + r.
//
// Written one weight at a time (we, layer, row, col, wdata) over the
// configuration bus; read one whole row per cycle (raddr, rdata valid the
// next cycle) to load the MAC grid.
// The architecture does not describe where weights are kept; holding all
// layers of the small MLP on chip is this design's choice.
module weight_sram
  import nfp_pkg::*;
#(
  parameter int unsigned LAYERS = MAX_LAYERS
) (
  input  logic                                clk,
  input  logic                                we,
  input  logic [$clog2(LAYERS*MAC_DIM)-1:0]   waddr,
  input  logic [$clog2(MAC_DIM)-1:0]          wcol,
  input  mw_t                                 wdata,
  input  logic [$clog2(LAYERS*MAC_DIM)-1:0]   raddr,
  output mw_row_t                             rdata
);
  mw_row_t mem [LAYERS*MAC_DIM];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wcol] <= wdata;
    rdata <= mem[raddr];
  end
endmodule
