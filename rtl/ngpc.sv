// ngpc: neural graphics processing cluster, the top of the design. N_NFP
// neural fields processors sit next to the GPU's graphics processing
// clusters and share its L2 cache.
//
// The GPU configures the cluster (encoding type, levels, grid tables, MLP
// weights) and schedules the input-encoding and MLP kernels on it; the other
// kernels of the application stay on the GPU's streaming multiprocessors.
// Inputs are split into batches: while the GPU post-processes batch n, the
// cluster encodes and evaluates batch n+1.
//
// Interface. The configuration bus is shared: a write goes to every NFP whose
// bit is set in cfg_sel (all ones broadcasts the same tables and weights to
// every NFP). Each NFP has its own sample stream in and result stream out;
// these are the L2-side ports, left to the memory system to feed and drain.
// The L2 cache, the command buffer and the GPU itself are not part of this
// RTL. idle is high when every NFP has drained all its work.
// From the architecture: N NFP units per cluster (8, 16, 32 or 64 evaluated),
// connection to the shared L2, configuration by the GPU. This design's
// choice: the select-mask bus and the per-NFP valid/ready streams.
// Lint note: rst_n is an asynchronous reset for the registers and is also
// sampled by the assertions' `disable iff`; the resulting mixed-reset
// warning concerns the assertions only.
module ngpc
  import nfp_pkg::*;
#(
  parameter int unsigned N_NFP      = 8,
  parameter int unsigned GRID_DEPTH = 1 << LOG2_T_MAX,
  parameter int unsigned BATCH_MAX  = 64
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cfg_we,
  input  logic [N_NFP-1:0]     cfg_sel,
  input  logic [31:0]          cfg_addr,
  input  logic [31:0]          cfg_wdata,
  output logic                 cfg_busy,
  input  logic     [N_NFP-1:0] in_valid,
  output logic     [N_NFP-1:0] in_ready,
  input  sample_t              in_sample [N_NFP],
  output logic     [N_NFP-1:0] out_valid,
  input  logic     [N_NFP-1:0] out_ready,
  output act_vec_t             out_vec   [N_NFP],
  output logic     [N_NFP-1:0] out_last,
  output logic                 idle
);
  logic [N_NFP-1:0] n_busy, n_idle;

  for (genvar n = 0; n < N_NFP; n++) begin : g_nfp
    nfp #(.GRID_DEPTH(GRID_DEPTH), .BATCH_MAX(BATCH_MAX)) u_nfp (
      .clk, .rst_n,
      .cfg_we(cfg_we && cfg_sel[n]), .cfg_addr, .cfg_wdata, .cfg_busy(n_busy[n]),
      .in_valid(in_valid[n]), .in_ready(in_ready[n]), .in_sample(in_sample[n]),
      .out_valid(out_valid[n]), .out_ready(out_ready[n]), .out_vec(out_vec[n]),
      .out_last(out_last[n]), .idle(n_idle[n])
    );
  end

  assign cfg_busy = |n_busy;
  assign idle     = &n_idle;
endmodule
