// input_fifo: synchronous FIFO that prefetches normalized input coordinates
// ahead of the IE engines of an NFP.
//
// A circular buffer of DEPTH entries with read and write pointers one bit
// wider than the address, so full and empty are told apart by the extra bit.
// Interface: valid/ready on both sides; in_ready is low when full, out_valid
// low when empty. A write and a read may happen in the same cycle. The head
// entry is shown combinationally on out_data (first-word fall-through), so a
// word written in cycle t can be read in cycle t+1.
// The FIFO itself follows the architecture; its depth and the ready/valid
// handshake are this design's choice.
module input_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 16
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  output logic in_ready,
  input  T     in_data,
  output logic out_valid,
  input  logic out_ready,
  output T     out_data,
  output logic [$clog2(DEPTH):0] count
);
  localparam int unsigned AW = $clog2(DEPTH);
  T mem [DEPTH];
  logic [AW:0] wp, rp;

  assign count     = wp - rp;
  assign in_ready  = (count != DEPTH[AW:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rp[AW-1:0]];

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) mem[wp[AW-1:0]] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (in_valid && in_ready)   wp <= wp + 1'b1;
      if (out_valid && out_ready) rp <= rp + 1'b1;
    end
  end

  // pointers never cross: occupancy stays within DEPTH
  assert property (@(posedge clk) disable iff (!rst_n) count <= DEPTH[AW:0]);
endmodule
