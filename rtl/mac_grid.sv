// mac_grid: MAC_DIM x MAC_DIM grid of multiply-accumulate units that
// evaluates one fully connected layer for one input vector per cycle.
//
// Weight stationary: MAC unit (j,i) holds weight W[j][i], loaded one row of
// MAC_DIM weights per cycle through w_we/w_row/w_data (a whole layer takes
// MAC_DIM cycles). With the weights in place, each input vector a presented
// with in_valid gives, one cycle later on out_vec with out_valid,
//   y[j] = sat16( (sum_i W[j][i] * a[i]) >>> MW_FRAC ),  then ReLU if relu.
// Products are Q16.16, summed in 40 bits without rounding, and the result is
// saturated to Q8.8. The layer has no bias, like the fully fused MLPs it
// runs. Loading weights while a vector is in flight is not allowed.
// The 64x64 grid computing one layer at a time follows the architecture;
// the weight-stationary dataflow, formats, single pipeline stage and the
// ReLU are this design's choice.
module mac_grid
  import nfp_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       w_we,
  input  logic [$clog2(MAC_DIM)-1:0] w_row,
  input  mw_row_t                    w_data,
  input  logic                       in_valid,
  input  act_vec_t                   in_vec,
  input  logic                       relu,
  output logic                       out_valid,
  output act_vec_t                   out_vec
);
  mw_row_t  wreg [MAC_DIM];
  act_vec_t y;

  // one dot product of MAC_DIM weights and inputs per output neuron j
  for (genvar j = 0; j < MAC_DIM; j++) begin : g_row
    logic signed [39:0] sum, sh;
    logic [ACT_W-1:0]   yj;
    assign y[j] = yj;
    always_comb begin
      sum = '0;
      for (int i = 0; i < MAC_DIM; i++)
        sum += 40'($signed(wreg[j][i])) * 40'($signed(in_vec[i]));
      sh = sum >>> MW_FRAC;
      if (sh > 40'sd32767)       yj = 16'h7fff;
      else if (sh < -40'sd32768) yj = 16'h8000;
      else                       yj = ACT_W'(sh);
      if (relu && yj[ACT_W-1]) yj = '0;
    end
  end

  always_ff @(posedge clk) begin
    if (w_we) wreg[w_row] <= w_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_vec   <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) out_vec <= y;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(w_we && out_valid && in_valid));
endmodule
