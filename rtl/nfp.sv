// nfp: neural fields processor. Accelerates the two dominant kernels of a
// neural-graphics application, the multi-resolution grid input encoding and
// the small MLP, and fuses them: the encoded inputs go straight from the
// input encoding (IE) engines into the MLP engine's input memory and never
// leave the chip.
//
// Structure: input FIFO -> gather -> 16 IE engines -> concatenation ->
// MLP input memory -> MLP engine -> output stream.
// Engine e serves resolution level e mod L and input slot e / L, where L is
// the number of levels (a power of two up to 16). So 16/L samples are
// encoded at once: 1 for a 16-level hashgrid, 2 for an 8-level densegrid,
// 8 for a 2-level densegrid. The gather stage pops up to 16/L samples from
// the FIFO (fewer if one carries `last`), launches all engines together, and
// the concatenation stage writes one MLP input vector per sample: features
// of level l go to lanes 2l and 2l+1, the other lanes are zero.
// A batch (cfg batch samples, or fewer at `last`) is handed to the MLP
// engine when it is idle; while the MLP engine still owns the input memory
// the concatenation stage waits (an IE stall).
//
// Configuration bus (write only, one word per cycle, cfg_addr[31:28] region):
//   0 registers   addr[7:0] = REG_* of nfp_pkg, data in the low bits
//   1 weights     addr[14:12] layer, [11:6] row (output neuron), [5:0] column
//   2 grid table  addr[23:20] level, [18:0] entry; written into every engine
//                 serving that level under the current L (write L first)
// After changing base resolution, growth or L, write REG_APPLY: the engines
// recompute their grid scales (up to 16 cycles, cfg_busy high meanwhile).
// Streams: in_* / out_* are valid/ready. Outputs come out in input order.
//
// From the architecture: 16 IE engines with one level each and a 1 MB table
// per engine, inputs in parallel for fewer levels, IE-to-MLP fusion, the
// 64x64 MAC grid. This design's choice: the bus, the batching and hand-over,
// the number formats, FIFO depth and batch size.
// Lint notes: cfg_addr bits outside the fields above are ignored on purpose
// (unused-signal warning). The assertions sample rst_n synchronously
// through `disable iff` while the registers use it as an asynchronous reset;
// the synchronous/asynchronous reset warning this gives concerns the
// assertions only, not the circuit.
module nfp
  import nfp_pkg::*;
#(
  parameter int unsigned GRID_DEPTH = 1 << LOG2_T_MAX,
  parameter int unsigned BATCH_MAX  = 64,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  // configuration
  input  logic        cfg_we,
  input  logic [31:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  output logic        cfg_busy,
  // samples in
  input  logic        in_valid,
  output logic        in_ready,
  input  sample_t     in_sample,
  // results out
  output logic        out_valid,
  input  logic        out_ready,
  output act_vec_t    out_vec,
  output logic        out_last,
  output logic        idle
);
  localparam int unsigned GW = $clog2(GRID_DEPTH);
  localparam int unsigned BW = $clog2(BATCH_MAX);

  nfp_cfg_t cfg;
  logic     apply;

  // ---------------- configuration decode ----------------
  logic [3:0] region;
  assign region = cfg_addr[31:28];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg.mode     <= ENC_HASH;
      cfg.levels   <= 5'd16;
      cfg.dims     <= 2'd3;
      cfg.n_layers <= 4'd1;
      cfg.base_res <= 16'd16;
      cfg.growth   <= 32'h0001_0000;
      cfg.log2_t   <= 5'(LOG2_T_MAX);
      cfg.batch    <= 7'(BATCH_MAX);
      apply        <= 1'b0;
    end else begin
      apply <= 1'b0;
      if (cfg_we && region == REG_REGION) begin
        unique case (cfg_addr[7:0])
          REG_MODE:   cfg.mode     <= enc_mode_e'(cfg_wdata[0]);
          REG_LEVELS: cfg.levels   <= cfg_wdata[4:0];
          REG_DIMS:   cfg.dims     <= cfg_wdata[1:0];
          REG_LAYERS: cfg.n_layers <= cfg_wdata[3:0];
          REG_BASE:   cfg.base_res <= cfg_wdata[15:0];
          REG_GROWTH: cfg.growth   <= cfg_wdata;
          REG_LOG2T:  cfg.log2_t   <= cfg_wdata[4:0];
          REG_BATCH:  cfg.batch    <= cfg_wdata[6:0];
          REG_APPLY:  apply        <= 1'b1;
          default: ;
        endcase
      end
    end
  end

  // log2(L) and slots per launch P = 16/L
  logic [2:0] lg_l;
  logic [4:0] n_slots;
  always_comb begin
    lg_l = 3'd0;
    for (int k = 1; k <= 4; k++) if (cfg.levels[k]) lg_l = 3'(k);
    n_slots = 5'(16 >> lg_l);
  end

  // ---------------- input FIFO ----------------
  logic    f_valid, f_ready;
  sample_t f_data;
  logic [$clog2(FIFO_DEPTH):0] f_count;
  input_fifo #(.T(sample_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_sample),
    .out_valid(f_valid), .out_ready(f_ready), .out_data(f_data), .count(f_count)
  );

  // ---------------- gather ----------------
  coord_vec_t slot_coord [N_IE];
  logic [4:0] gcnt;        // samples gathered
  logic       gfull, glast;
  logic [4:0] grp_cnt;     // samples in the group being encoded
  logic       grp_last, grp_active;
  logic       launch;
  logic [N_IE-1:0] e_in_ready, e_out_valid;
  logic [N_FEAT-1:0][ACT_W-1:0] e_feat [N_IE];
  logic       e_out_ready;

  assign f_ready = !gfull;
  assign launch  = gfull && !grp_active && (&e_in_ready);

  // ---------------- IE engines ----------------
  for (genvar e = 0; e < N_IE; e++) begin : g_ie
    logic [3:0] lvl, slot;
    logic       tw;
    assign lvl  = 4'(e) & 4'(cfg.levels - 5'd1);
    assign slot = 4'(e >> lg_l);
    assign tw   = cfg_we && region == GRID_REGION && cfg_addr[23:20] == lvl;
    ie_engine #(.GRID_DEPTH(GRID_DEPTH)) u_ie (
      .clk, .rst_n,
      .mode(cfg.mode), .dims(cfg.dims), .log2_t(cfg.log2_t),
      .base_res(cfg.base_res), .growth(cfg.growth), .level(lvl), .cfg_start(apply),
      .tw_en(tw), .tw_addr(cfg_addr[GW-1:0]), .tw_data(cfg_wdata[N_FEAT*FEAT_W-1:0]),
      .in_valid(launch), .in_ready(e_in_ready[e]), .in_coord(slot_coord[slot]),
      .out_valid(e_out_valid[e]), .out_ready(e_out_ready), .out_feat(e_feat[e])
    );
  end

  assign cfg_busy = !(&e_in_ready) && !grp_active;

  // ---------------- concatenation into the MLP input memory ----------------
  logic [4:0]  wb_slot;
  logic [BW:0] bcount;
  logic        bpend, bpend_last;
  logic        ib_free, mlp_busy, can_write, wb_do;
  act_vec_t    wb_vec;
  logic        batch_go;
  logic [3:0]  n_layers_q;

  assign can_write   = ib_free && !bpend;
  assign wb_do       = grp_active && (&e_out_valid) && can_write;
  assign e_out_ready = wb_do && (wb_slot == grp_cnt - 5'd1);
  assign batch_go    = bpend && !mlp_busy;
  assign n_layers_q  = cfg.n_layers;

  // lane 2l+f of the vector for slot s takes feature f of engine s*L + l
  for (genvar k = 0; k < MAC_DIM; k++) begin : g_lane
    if (k < N_IE * N_FEAT) begin : g_used
      localparam int unsigned LV = k / N_FEAT;
      localparam int unsigned FT = k % N_FEAT;
      logic [3:0] src;
      assign src       = 4'((wb_slot[3:0] << lg_l) + 4'(LV));
      assign wb_vec[k] = (5'(LV) < cfg.levels) ? e_feat[src][FT] : '0;
    end else begin : g_zero
      assign wb_vec[k] = '0;
    end
  end

  // performance / event counters (read by testbenches, not on the bus)
  logic [31:0] n_ie_stall, n_full_batches, n_partial_batches, n_groups;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gcnt       <= '0;
      gfull      <= 1'b0;
      glast      <= 1'b0;
      grp_cnt    <= '0;
      grp_last   <= 1'b0;
      grp_active <= 1'b0;
      wb_slot    <= '0;
      bcount     <= '0;
      bpend      <= 1'b0;
      bpend_last <= 1'b0;
      n_ie_stall <= '0;
      n_full_batches    <= '0;
      n_partial_batches <= '0;
      n_groups   <= '0;
      for (int s = 0; s < N_IE; s++) slot_coord[s] <= '0;
    end else begin
      // gather samples for the next launch
      if (f_valid && f_ready) begin
        slot_coord[gcnt[3:0]] <= f_data.coord;
        if (f_data.last || gcnt + 5'd1 == n_slots) begin
          gfull <= 1'b1;
          glast <= f_data.last;
        end
        gcnt <= gcnt + 5'd1;
      end
      if (launch) begin
        grp_cnt    <= gcnt;
        grp_last   <= glast;
        grp_active <= 1'b1;
        wb_slot    <= '0;
        gcnt       <= '0;
        gfull      <= 1'b0;
        glast      <= 1'b0;
        n_groups   <= n_groups + 1;
      end
      // write encoded vectors, one per cycle
      if (grp_active && (&e_out_valid) && !can_write) n_ie_stall <= n_ie_stall + 1;
      if (wb_do) begin
        bcount <= bcount + 1'b1;
        if (bcount + 1'b1 == (BW+1)'(cfg.batch) ||
            (grp_last && wb_slot == grp_cnt - 5'd1)) begin
          bpend      <= 1'b1;
          bpend_last <= grp_last && wb_slot == grp_cnt - 5'd1;
        end
        if (wb_slot == grp_cnt - 5'd1) grp_active <= 1'b0;
        else wb_slot <= wb_slot + 5'd1;
      end
      if (batch_go) begin
        bpend  <= 1'b0;
        bcount <= '0;
        if (bcount == (BW+1)'(cfg.batch)) n_full_batches <= n_full_batches + 1;
        else n_partial_batches <= n_partial_batches + 1;
      end
    end
  end

  // ---------------- MLP engine ----------------
  mlp_engine #(.BATCH_MAX(BATCH_MAX)) u_mlp (
    .clk, .rst_n, .n_layers(n_layers_q),
    .ww_en(cfg_we && region == WGT_REGION),
    .ww_layer(cfg_addr[12 +: $clog2(MAX_LAYERS)]),
    .ww_row(cfg_addr[11:6]), .ww_col(cfg_addr[5:0]), .ww_data(mw_t'(cfg_wdata[15:0])),
    .ib_free, .ib_we(wb_do), .ib_addr(BW'(bcount)), .ib_data(wb_vec),
    .batch_go, .batch_count(bcount), .batch_last(bpend_last),
    .out_valid, .out_ready, .out_vec, .out_last, .busy(mlp_busy)
  );

  assign idle = !f_valid && gcnt == 0 && !grp_active && !bpend && bcount == 0 && !mlp_busy;

  // the FIFO never reports more entries than it has, and is full when input is refused
  assert property (@(posedge clk) disable iff (!rst_n)
    f_count <= ($clog2(FIFO_DEPTH) + 1)'(FIFO_DEPTH) && (!in_ready -> f_count == ($clog2(FIFO_DEPTH) + 1)'(FIFO_DEPTH)));

  // L must be a power of two that divides 16
  assert property (@(posedge clk) disable iff (!rst_n)
    cfg.levels inside {5'd1, 5'd2, 5'd4, 5'd8, 5'd16});
endmodule
