// tb_ngpc: end-to-end test of the whole cluster at its default size (8 NFPs,
// each with 16 encoding engines holding 2^19-entry tables and a 64x64 MAC
// grid), with no parameter overrides.
//
// Every NFP gets its own random sample stream; each result vector is checked
// against a reference model (multi-resolution encoding at every level,
// concatenation, then the MLP layer by layer). The phases exercise:
//   1  broadcast configuration (cfg_sel all ones): 16-level hashgrid, 3-D,
//      3-layer MLP, batch 64, one full and one partial batch per NFP, random
//      back-pressure on half of the result streams
//   2  per-NFP configuration (cfg_sel masks) and a mode switch: NFPs 0-3 run
//      an 8-level densegrid (two samples per launch, batch 16), NFPs 4-7 a
//      2-level low-resolution densegrid (eight samples per launch)
//   3  switch back to a 2-D 16-level hashgrid on every NFP
// Each mechanism is counted and a failure is counted for one that never
// happened: IE stalls (input waiting for busy engines), full and partial
// batches, mode switches, result back-pressure, input back-pressure (full
// input FIFO) and masked configuration writes. The cluster must be idle
// after each phase.
module tb_ngpc;
  import nfp_pkg::*;
  import nfp_ref_pkg::*;
  localparam int N = 8;
  localparam int NS = 72;    // max samples per NFP per phase

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0, cfg_busy, idle;
  logic [N-1:0] cfg_sel = '1;
  logic [31:0] cfg_addr = 0, cfg_wdata = 0;
  logic [N-1:0] in_valid = '0, in_ready, out_valid, out_ready = '1, out_last;
  sample_t  in_sample [N];
  act_vec_t out_vec   [N];

  ngpc dut (.*);

  int W[2][8][64][64];          // weights per NFP group (0: NFPs 0-3, 1: 4-7)
  int unsigned X[N][NS][3];
  int E[N][NS][64];
  int n_samp[N];
  bit rand_ready[N];
  int n_out[N];
  bit done[N];
  int phase_go = 0;

  // mechanism counters
  int n_mode_switch = 0, n_out_bp = 0, n_in_bp = 0, n_masked_wr = 0;
  bit last_mode_valid = 0;
  enc_mode_e last_mode;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("timeout: phase %0d", phase_go);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    for (int n = 0; n < N; n++) begin
      if (out_valid[n] && !out_ready[n]) n_out_bp++;
      if (in_valid[n] && !in_ready[n]) n_in_bp++;
    end
    if (cfg_we && cfg_sel != '1 && cfg_sel != '0) n_masked_wr++;
  end

  task automatic wr(logic [31:0] a, logic [31:0] d);
    cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(posedge clk);
    #1 cfg_we = 0;
  endtask

  task automatic setup(int grp, bit hash, int levels, int dims, int nl, int base, int g, int l2t, int batch);
    if (last_mode_valid && enc_mode_e'(hash) != last_mode) n_mode_switch++;
    last_mode = enc_mode_e'(hash);
    last_mode_valid = 1;
    wr({REG_REGION, 20'h0, REG_MODE},   32'(hash));
    wr({REG_REGION, 20'h0, REG_LEVELS}, 32'(levels));
    wr({REG_REGION, 20'h0, REG_DIMS},   32'(dims));
    wr({REG_REGION, 20'h0, REG_LAYERS}, 32'(nl));
    wr({REG_REGION, 20'h0, REG_BASE},   32'(base));
    wr({REG_REGION, 20'h0, REG_GROWTH}, 32'(g));
    wr({REG_REGION, 20'h0, REG_LOG2T},  32'(l2t));
    wr({REG_REGION, 20'h0, REG_BATCH},  32'(batch));
    wr({REG_REGION, 20'h0, REG_APPLY},  32'd1);
    @(posedge clk);
    while (cfg_busy) @(posedge clk);
    for (int l = 0; l < nl; l++)
      for (int r = 0; r < 64; r++)
        for (int c = 0; c < 64; c++) begin
          W[grp][l][r][c] = int'($urandom % 97) - 48;
          wr({WGT_REGION, 13'h0, 3'(l), 6'(r), 6'(c)}, 32'(W[grp][l][r][c]) & 32'hffff);
        end
  endtask

  // samples for NFP n: table entries go to every NFP in cfg_sel
  task automatic prepare(int n, int grp, bit hash, int levels, int dims, int nl, int base, int g, int l2t, int cnt);
    n_samp[n] = cnt;
    for (int s = 0; s < cnt; s++) begin
      int a[64], y[64];
      for (int d = 0; d < 3; d++) X[n][s][d] = $urandom % 65536;
      if (dims == 2) X[n][s][2] = 0;
      for (int i = 0; i < 64; i++) a[i] = 0;
      for (int l = 0; l < levels; l++) begin
        int f0, f1;
        for (int c = 0; c < (1 << dims); c++) begin
          int unsigned idx;
          idx = ref_corner_index(hash, dims, l2t, base, 64'(g), l, X[n][s][0], X[n][s][1], X[n][s][2], c);
          wr({GRID_REGION, 4'h0, 4'(l), 1'b0, 19'(idx)}, table_word(l, idx));
        end
        ref_encode(hash, dims, l2t, base, 64'(g), l, X[n][s][0], X[n][s][1], X[n][s][2], f0, f1);
        a[2 * l] = f0; a[2 * l + 1] = f1;
      end
      for (int l = 0; l < nl; l++) begin
        ref_layer(W[grp][l], a, l != nl - 1, y);
        a = y;
      end
      E[n][s] = a;
    end
  endtask

  // per-NFP stream driver and result checker, started by phase_go
  for (genvar n = 0; n < N; n++) begin : g_port
    initial begin
      int seen;
      sample_t smp;
      seen = 0;
      in_sample[n] = '0;
      forever begin
        wait (phase_go != seen);
        seen = phase_go;
        n_out[n] = 0;
        fork
          begin
            for (int s = 0; s < n_samp[n]; s++) begin
              smp.coord[0] = 16'(X[n][s][0]);
              smp.coord[1] = 16'(X[n][s][1]);
              smp.coord[2] = 16'(X[n][s][2]);
              smp.last     = (s == n_samp[n] - 1);
              in_valid[n]  <= 1;
              in_sample[n] <= smp;
              @(posedge clk);
              while (!in_ready[n]) @(posedge clk);
            end
            in_valid[n] <= 0;
          end
          begin
            while (n_out[n] < n_samp[n]) begin
              @(posedge clk);
              if (out_valid[n] && out_ready[n]) begin
                checks++;
                for (int j = 0; j < 64; j++) if (out_vec[n][j] != 16'(E[n][n_out[n]][j])) begin
                  failures++;
                  $display("nfp %0d sample %0d lane %0d got %0d exp %0d", n, n_out[n], j,
                           $signed(out_vec[n][j]), E[n][n_out[n]][j]);
                  break;
                end
                checks++;
                if (out_last[n] != (n_out[n] == n_samp[n] - 1)) begin
                  failures++; $display("nfp %0d out_last at %0d", n, n_out[n]);
                end
                n_out[n]++;
              end
              out_ready[n] <= rand_ready[n] ? ($urandom % 4 == 0) : 1'b1;
            end
            out_ready[n] <= 1;
          end
        join
        done[n] = 1;
      end
    end
  end

  task automatic run_phase();
    for (int n = 0; n < N; n++) done[n] = 0;
    phase_go++;
    for (int n = 0; n < N; n++) wait (done[n]);
    repeat (3) @(posedge clk);
    checks++;
    if (!idle) begin failures++; $display("cluster not idle after phase %0d", phase_go); end
  endtask

  function automatic int sum_counter(int which);
    int t;
    t = 0;
    case (which)
      0: t = dut.g_nfp[0].u_nfp.n_ie_stall + dut.g_nfp[1].u_nfp.n_ie_stall + dut.g_nfp[2].u_nfp.n_ie_stall
           + dut.g_nfp[3].u_nfp.n_ie_stall + dut.g_nfp[4].u_nfp.n_ie_stall + dut.g_nfp[5].u_nfp.n_ie_stall
           + dut.g_nfp[6].u_nfp.n_ie_stall + dut.g_nfp[7].u_nfp.n_ie_stall;
      1: t = dut.g_nfp[0].u_nfp.n_full_batches + dut.g_nfp[1].u_nfp.n_full_batches + dut.g_nfp[2].u_nfp.n_full_batches
           + dut.g_nfp[3].u_nfp.n_full_batches + dut.g_nfp[4].u_nfp.n_full_batches + dut.g_nfp[5].u_nfp.n_full_batches
           + dut.g_nfp[6].u_nfp.n_full_batches + dut.g_nfp[7].u_nfp.n_full_batches;
      default: t = dut.g_nfp[0].u_nfp.n_partial_batches + dut.g_nfp[1].u_nfp.n_partial_batches
           + dut.g_nfp[2].u_nfp.n_partial_batches + dut.g_nfp[3].u_nfp.n_partial_batches
           + dut.g_nfp[4].u_nfp.n_partial_batches + dut.g_nfp[5].u_nfp.n_partial_batches
           + dut.g_nfp[6].u_nfp.n_partial_batches + dut.g_nfp[7].u_nfp.n_partial_batches;
    endcase
    return t;
  endfunction

  initial begin
    for (int n = 0; n < N; n++) begin rand_ready[n] = 0; done[n] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);

    // phase 1: broadcast, 16-level hashgrid, 3 layers, batch 64
    cfg_sel = '1;
    setup(0, 1, 16, 3, 3, 16, 99334, 19, 64);
    for (int n = 0; n < N; n++) begin
      W[1] = W[0];
      prepare(n, 0, 1, 16, 3, 3, 16, 99334, 19, (n == 0) ? 70 : 8 + 3 * n);
      rand_ready[n] = n[0];
    end
    run_phase();

    // phase 2: two groups configured separately, densegrid modes
    for (int n = 0; n < N; n++) rand_ready[n] = (n == 5);
    cfg_sel = 8'h0f;
    setup(0, 0, 8, 3, 2, 16, 92078, 19, 16);
    for (int n = 0; n < 4; n++) prepare(n, 0, 0, 8, 3, 2, 16, 92078, 19, 5 + 6 * n);
    cfg_sel = 8'hf0;
    setup(1, 0, 2, 3, 1, 128, 65536, 19, 64);
    for (int n = 4; n < 8; n++) prepare(n, 1, 0, 2, 3, 1, 128, 65536, 19, 3 + 5 * n);
    run_phase();

    // phase 3: back to a hashgrid on every NFP, 2-D input
    cfg_sel = '1;
    setup(0, 1, 16, 2, 2, 16, 82570, 19, 64);
    W[1] = W[0];
    for (int n = 0; n < N; n++) prepare(n, 0, 1, 16, 2, 2, 16, 82570, 19, 2 + n);
    run_phase();

    $display("events: ie_stall=%0d full=%0d partial=%0d mode_switch=%0d out_bp=%0d in_bp=%0d masked_wr=%0d",
             sum_counter(0), sum_counter(1), sum_counter(2), n_mode_switch, n_out_bp, n_in_bp, n_masked_wr);
    checks++; if (sum_counter(0) == 0) begin failures++; $display("no IE stall"); end
    checks++; if (sum_counter(1) == 0) begin failures++; $display("no full batch"); end
    checks++; if (sum_counter(2) == 0) begin failures++; $display("no partial batch"); end
    checks++; if (n_mode_switch < 2) begin failures++; $display("mode switches %0d", n_mode_switch); end
    checks++; if (n_out_bp == 0) begin failures++; $display("no result back-pressure"); end
    checks++; if (n_in_bp == 0) begin failures++; $display("no input back-pressure"); end
    checks++; if (n_masked_wr == 0) begin failures++; $display("no masked configuration write"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
