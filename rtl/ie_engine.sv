// ie_engine: input encoding (IE) engine. Encodes one input sample at one
// resolution level of a multi-resolution grid encoding and returns the
// linearly interpolated feature vector (N_FEAT features, Q8.8).
//
// Data flow, as in the architecture: grid_scale gives the scale of this
// engine's level; pos_fract turns the normalized coordinates into a grid
// cell and in-cell fraction; for each of the 2^dims cell corners grid_index
// forms the table index (hash or dense, modulo the power-of-two table size),
// grid_sram is read, and the corner's features are multiplied by the weight
// from interpol_weights and accumulated.
//
// Sequencing (this design's choice): one table read per cycle, corners in
// order 0..2^dims-1, read data one cycle later. An input accepted in cycle t
// (in_valid & in_ready) has out_valid in cycle t + 2^dims + 2, i.e. 10 cycles
// for 3-D and 6 for 2-D inputs; out_feat is held until out_ready. in_ready is
// low while the engine is busy or its grid scale is being recomputed
// (cfg_start .. scale ready). The table is written through tw_* at any time
// the engine is not encoding.
// The dense-grid vertices per axis are floor(scale)+2, so no two cell corners
// share an entry before the mod-T wrap.
module ie_engine
  import nfp_pkg::*;
#(
  parameter int unsigned GRID_DEPTH = 1 << LOG2_T_MAX
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // static configuration
  input  enc_mode_e                     mode,
  input  logic [1:0]                    dims,
  input  logic [4:0]                    log2_t,
  input  logic [15:0]                   base_res,
  input  logic [31:0]                   growth,
  input  logic [3:0]                    level,
  input  logic                          cfg_start,   // recompute scale
  // table load
  input  logic                          tw_en,
  input  logic [$clog2(GRID_DEPTH)-1:0] tw_addr,
  input  grid_word_t                    tw_data,
  // sample in
  input  logic                          in_valid,
  output logic                          in_ready,
  input  coord_vec_t                    in_coord,
  // encoded features out
  output logic                          out_valid,
  input  logic                          out_ready,
  output logic [N_FEAT-1:0][ACT_W-1:0]  out_feat
);
  localparam int unsigned AW = $clog2(GRID_DEPTH);
  typedef enum logic [2:0] {S_IDLE, S_POS, S_LOOK, S_ACC, S_OUT} state_e;
  state_e state;

  logic [SCALE_W-1:0]    scale;
  logic                  scale_busy, scale_done;
  coord_vec_t            coord_r;
  gint_t [MAX_DIMS-1:0]  pint, pint_r;
  frac_t [MAX_DIMS-1:0]  pfrac, pfrac_r;
  logic [MAX_DIMS-1:0]   corner, last_corner;
  logic [LOG2_T_MAX-1:0] index;
  logic [WGT_W-1:0]      weight, weight_r;
  logic                  rd_pending;
  grid_word_t            rdata;
  logic signed [31:0]    acc [N_FEAT];

  grid_scale u_scale (
    .clk, .rst_n, .start(cfg_start), .base_res, .growth, .level,
    .scale, .busy(scale_busy), .done(scale_done)
  );

  pos_fract u_pos (.coord(coord_r), .scale, .pos_int(pint), .pos_frac(pfrac));

  grid_index u_index (
    .mode, .dims, .log2_t, .res(scale[31:16] + 16'd2),
    .pos_int(pint_r), .corner, .index
  );

  interpol_weights u_wgt (.dims, .frac(pfrac_r), .corner, .weight);

  grid_sram #(.DEPTH(GRID_DEPTH)) u_sram (
    .clk, .we(tw_en), .waddr(tw_addr), .wdata(tw_data),
    .raddr(AW'(index)), .rdata
  );

  assign last_corner = (dims == 2'd3) ? 3'd7 : 3'd3;
  assign in_ready    = (state == S_IDLE) && !scale_busy && !cfg_start;
  assign out_valid   = (state == S_OUT);

  always_comb begin
    for (int f = 0; f < N_FEAT; f++)
      out_feat[f] = ACT_W'(acc[f] >>> (16 + FEAT_FRAC - ACT_FRAC));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      coord_r    <= '0;
      pint_r     <= '0;
      pfrac_r    <= '0;
      corner     <= '0;
      weight_r   <= '0;
      rd_pending <= 1'b0;
      for (int f = 0; f < N_FEAT; f++) acc[f] <= '0;
    end else begin
      // accumulate the corner whose table word arrives this cycle
      if (rd_pending) begin
        for (int f = 0; f < N_FEAT; f++)
          acc[f] <= acc[f] + 32'($signed({1'b0, weight_r})) * 32'($signed(rdata[f*FEAT_W +: FEAT_W]));
      end
      rd_pending <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid && in_ready) begin
          coord_r <= in_coord;
          state   <= S_POS;
        end
        S_POS: begin
          pint_r  <= pint;
          pfrac_r <= pfrac;
          corner  <= '0;
          for (int f = 0; f < N_FEAT; f++) acc[f] <= '0;
          state   <= S_LOOK;
        end
        S_LOOK: begin
          weight_r   <= weight;
          rd_pending <= 1'b1;
          corner     <= corner + 1'b1;
          if (corner == last_corner) state <= S_ACC;
        end
        S_ACC:  state <= S_OUT;
        S_OUT:  if (out_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // a table read is only started in S_LOOK, so its data is always consumed
  assert property (@(posedge clk) disable iff (!rst_n) rd_pending |-> state inside {S_LOOK, S_ACC});
  // the scale is ready when the scale unit signals done, never while it works
  assert property (@(posedge clk) disable iff (!rst_n) scale_done |-> !scale_busy);
endmodule
