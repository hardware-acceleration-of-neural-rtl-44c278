// mlp_engine: runs the small fully fused MLP of a neural field over a batch
// of encoded inputs, one layer at a time on a 64x64 MAC grid.
//
// Memories: the input memory (in_buf), written directly by the IE engines
// through ib_*; two hidden-feature buffers that alternate as source and
// destination from layer to layer; and the weight store.
// Operation on batch_go (count = nb vectors in in_buf, last = end of stream):
//   for each layer l = 0 .. n_layers-1
//     LOAD : copy the layer's 64 weight rows into the MAC grid (65 cycles)
//     COMP : stream the nb source vectors through the grid, one per cycle,
//            and write the results (ReLU except on the last layer) to the
//            destination buffer (nb+2 cycles)
//   DRAIN: stream the nb output vectors out on out_* (valid/ready), out_last
//          marks the last vector of a batch that had `last` set.
// Layer 0 reads in_buf and writes buffer 0; layer l>0 reads buffer (l-1)%2
// and writes buffer l%2. in_buf is handed back (ib_free=1) as soon as layer 0
// is done, so the IE engines fill the next batch while later layers run.
// out_valid of the first result rises 1 + n_layers*(nb+67) clock edges after
// the edge that samples batch_go; then one vector per 2 cycles while
// out_ready stays high.
// The 64x64 grid, layer-at-a-time execution, the on-chip hidden features and
// the IE engines writing directly into the MLP input memory follow the
// architecture; the batching, buffer scheme and timing are this design's.
module mlp_engine
  import nfp_pkg::*;
#(
  parameter int unsigned BATCH_MAX = 64
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [3:0]                   n_layers,
  // weight load
  input  logic                         ww_en,
  input  logic [$clog2(MAX_LAYERS)-1:0] ww_layer,
  input  logic [$clog2(MAC_DIM)-1:0]   ww_row,
  input  logic [$clog2(MAC_DIM)-1:0]   ww_col,
  input  mw_t                          ww_data,
  // input memory, written by the IE engines
  output logic                         ib_free,
  input  logic                         ib_we,
  input  logic [$clog2(BATCH_MAX)-1:0] ib_addr,
  input  act_vec_t                     ib_data,
  input  logic                         batch_go,
  input  logic [$clog2(BATCH_MAX):0]   batch_count,
  input  logic                         batch_last,
  // results
  output logic                         out_valid,
  input  logic                         out_ready,
  output act_vec_t                     out_vec,
  output logic                         out_last,
  output logic                         busy
);
  localparam int unsigned BW = $clog2(BATCH_MAX);
  localparam int unsigned LW = $clog2(MAX_LAYERS);
  localparam int unsigned RW = $clog2(MAC_DIM);
  typedef enum logic [1:0] {M_IDLE, M_LOAD, M_COMP, M_DRAIN} mstate_e;
  mstate_e state;

  logic [BW:0]   nb;
  logic          last_r;
  logic [3:0]    layer;
  logic [RW:0]   lcnt;        // LOAD row counter 0..64
  logic [BW:0]   rcnt, wcnt;  // COMP read / write counters
  logic          rd_v;        // source vector read issued last cycle
  logic          drain_ok;    // drain read data valid
  logic          is_last_layer;

  // weight store
  logic [LW+RW-1:0] w_raddr;
  mw_row_t          w_rdata;
  // MAC grid
  logic             g_we;
  logic [RW-1:0]    g_row;
  logic             g_out_valid;
  act_vec_t         g_out;
  // feature buffers
  logic [BW-1:0]    src_raddr, dst_waddr;
  act_vec_t         ib_rdata, b_rdata [2];
  logic             b_we [2];

  assign is_last_layer = (layer == n_layers - 4'd1);
  assign busy          = (state != M_IDLE);

  weight_sram #(.LAYERS(MAX_LAYERS)) u_wgt (
    .clk, .we(ww_en), .waddr({ww_layer, ww_row}), .wcol(ww_col), .wdata(ww_data),
    .raddr(w_raddr), .rdata(w_rdata)
  );

  assign w_raddr = {layer[LW-1:0], lcnt[RW-1:0]};
  assign g_we    = (state == M_LOAD) && (lcnt != 0);
  assign g_row   = RW'(lcnt - 1'b1);

  mac_grid u_grid (
    .clk, .rst_n, .w_we(g_we), .w_row(g_row), .w_data(w_rdata),
    .in_valid(rd_v), .in_vec(layer == 0 ? ib_rdata : b_rdata[~layer[0]]),
    .relu(!is_last_layer), .out_valid(g_out_valid), .out_vec(g_out)
  );

  assign src_raddr = (state == M_DRAIN) ? BW'(wcnt) : BW'(rcnt);
  assign dst_waddr = BW'(wcnt);

  feature_sram #(.DEPTH(BATCH_MAX)) u_ibuf (
    .clk, .we(ib_we), .waddr(ib_addr), .wdata(ib_data), .raddr(src_raddr), .rdata(ib_rdata)
  );
  for (genvar b = 0; b < 2; b++) begin : g_buf
    assign b_we[b] = (state == M_COMP) && g_out_valid && (layer[0] == b[0]);
    feature_sram #(.DEPTH(BATCH_MAX)) u_buf (
      .clk, .we(b_we[b]), .waddr(dst_waddr), .wdata(g_out), .raddr(src_raddr), .rdata(b_rdata[b])
    );
  end

  // DRAIN reads the last layer's destination buffer at wcnt
  assign out_vec   = b_rdata[layer[0]];
  assign out_valid = (state == M_DRAIN) && drain_ok;
  assign out_last  = out_valid && last_r && (wcnt == nb - 1'b1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= M_IDLE;
      nb       <= '0;
      last_r   <= 1'b0;
      layer    <= '0;
      lcnt     <= '0;
      rcnt     <= '0;
      wcnt     <= '0;
      rd_v     <= 1'b0;
      drain_ok <= 1'b0;
      ib_free  <= 1'b1;
    end else begin
      rd_v <= 1'b0;
      unique case (state)
        M_IDLE: if (batch_go) begin
          nb      <= batch_count;
          last_r  <= batch_last;
          layer   <= '0;
          lcnt    <= '0;
          ib_free <= 1'b0;
          state   <= M_LOAD;
        end
        M_LOAD: begin
          if (lcnt == (RW+1)'(MAC_DIM)) begin
            state <= M_COMP;
            rcnt  <= '0;
            wcnt  <= '0;
          end else begin
            lcnt <= lcnt + 1'b1;
          end
        end
        M_COMP: begin
          if (rcnt < nb) begin
            rd_v <= 1'b1;
            rcnt <= rcnt + 1'b1;
          end
          if (g_out_valid) begin
            if (wcnt == nb - 1'b1) begin
              if (layer == 0) ib_free <= 1'b1;
              wcnt <= '0;
              if (is_last_layer) begin
                state    <= M_DRAIN;
                drain_ok <= 1'b0;
              end else begin
                layer <= layer + 1'b1;
                lcnt  <= '0;
                state <= M_LOAD;
              end
            end else begin
              wcnt <= wcnt + 1'b1;
            end
          end
        end
        M_DRAIN: begin
          drain_ok <= 1'b1;
          if (out_valid && out_ready) begin
            drain_ok <= 1'b0;
            if (wcnt == nb - 1'b1) state <= M_IDLE;
            else wcnt <= wcnt + 1'b1;
          end
        end
        default: state <= M_IDLE;
      endcase
    end
  end

  // the IE side may only write the input memory while it owns it
  assert property (@(posedge clk) disable iff (!rst_n) ib_we |-> ib_free);
  assert property (@(posedge clk) disable iff (!rst_n) batch_go |-> (state == M_IDLE && batch_count != 0));
endmodule
