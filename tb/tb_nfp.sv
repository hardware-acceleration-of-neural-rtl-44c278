// tb_nfp: one neural fields processor at full size (16 engines with 2^19
// entry tables, 64x64 MAC grid). Runs three encodings end to end through the
// configuration bus and the sample/result streams and checks every result
// vector against the reference (encoding at every level, concatenation,
// MLP):
//   A  16-level hashgrid, 3-D, 3-layer MLP, batch 64, 70 samples
//      (one full and one partial batch), random result back-pressure
//   B  8-level densegrid, 3-D, 2 samples per launch, batch 16, 21 samples
//   C  2-level densegrid, Nmin 128, 8 samples per launch, 13 samples, and a
//      2-D 16-level hashgrid (GIA-like), 9 samples
// Also requires IE stalls, full and partial batches and the last flag.
module tb_nfp;
  import nfp_pkg::*;
  import nfp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic cfg_we = 0, cfg_busy;
  logic [31:0] cfg_addr = 0, cfg_wdata = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1, out_last, idle;
  sample_t in_sample = '0;
  act_vec_t out_vec;

  nfp dut (.*);

  int W[8][64][64];
  int unsigned X[256][3];
  int E[256][64];
  int n_out;
  bit rand_ready = 0;

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("timeout: n_out=%0d", n_out);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr(logic [31:0] a, logic [31:0] d);
    cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(posedge clk);
    #1 cfg_we = 0;
  endtask

  task automatic setup(bit hash, int levels, int dims, int nl, int base, int g, int l2t, int batch);
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
          W[l][r][c] = int'($urandom % 97) - 48;
          wr({WGT_REGION, 13'h0, 3'(l), 6'(r), 6'(c)}, 32'(W[l][r][c]) & 32'hffff);
        end
  endtask

  // make samples, load their table entries and compute expected results
  task automatic prepare(bit hash, int levels, int dims, int nl, int base, int g, int l2t, int n);
    for (int s = 0; s < n; s++) begin
      int a[64], y[64];
      for (int d = 0; d < 3; d++) X[s][d] = $urandom % 65536;
      if (dims == 2) X[s][2] = 0;
      for (int i = 0; i < 64; i++) a[i] = 0;
      for (int l = 0; l < levels; l++) begin
        int f0, f1;
        for (int c = 0; c < (1 << dims); c++) begin
          int unsigned idx;
          idx = ref_corner_index(hash, dims, l2t, base, 64'(g), l, X[s][0], X[s][1], X[s][2], c);
          wr({GRID_REGION, 4'h0, 4'(l), 1'b0, 19'(idx)}, table_word(l, idx));
        end
        ref_encode(hash, dims, l2t, base, 64'(g), l, X[s][0], X[s][1], X[s][2], f0, f1);
        a[2 * l] = f0; a[2 * l + 1] = f1;
      end
      for (int l = 0; l < nl; l++) begin
        ref_layer(W[l], a, l != nl - 1, y);
        a = y;
      end
      E[s] = a;
    end
  endtask

  task automatic stream(int n);
    n_out = 0;
    fork
      begin
        for (int s = 0; s < n; s++) begin
          sample_t smp;
          smp.coord[0] = 16'(X[s][0]);
          smp.coord[1] = 16'(X[s][1]);
          smp.coord[2] = 16'(X[s][2]);
          smp.last     = (s == n - 1);
          in_valid  <= 1;
          in_sample <= smp;
          @(posedge clk);
          while (!in_ready) @(posedge clk);
        end
        in_valid <= 0;
      end
      begin
      while (n_out < n) begin
        @(posedge clk);
        if (out_valid && out_ready) begin
          checks++;
          for (int j = 0; j < 64; j++) if (out_vec[j] != 16'(E[n_out][j])) begin
            failures++; $display("sample %0d lane %0d got %0d exp %0d", n_out, j, $signed(out_vec[j]), E[n_out][j]);
            break;
          end
          checks++;
          if (out_last != (n_out == n - 1)) begin failures++; $display("out_last at %0d", n_out); end
          n_out++;
        end
        out_ready <= rand_ready ? ($urandom % 4 == 0) : 1'b1;
      end
      end
    join
    out_ready <= 1;
    repeat (3) @(posedge clk);
    checks++;
    if (!idle) begin failures++; $display("not idle after stream"); end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    // A: 16-level hashgrid (NeRF density), back-pressure on results
    setup(1, 16, 3, 3, 16, 99334, 19, 64);
    prepare(1, 16, 3, 3, 16, 99334, 19, 70);
    rand_ready = 1;
    stream(70);
    rand_ready = 0;
    // B: 8-level densegrid, two samples per launch
    setup(0, 8, 3, 2, 16, 92078, 19, 16);
    prepare(0, 8, 3, 2, 16, 92078, 19, 21);
    stream(21);
    // C: 2-level low-resolution densegrid, eight samples per launch
    setup(0, 2, 3, 1, 128, 65536, 19, 64);
    prepare(0, 2, 3, 1, 128, 65536, 19, 13);
    stream(13);
    // D: 2-D hashgrid (GIA)
    setup(1, 16, 2, 2, 16, 82570, 19, 64);
    prepare(1, 16, 2, 2, 16, 82570, 19, 9);
    stream(9);
    $display("events: ie_stall=%0d full=%0d partial=%0d launches=%0d", dut.n_ie_stall,
             dut.n_full_batches, dut.n_partial_batches, dut.n_groups);
    checks++; if (dut.n_ie_stall == 0) begin failures++; $display("no IE stall"); end
    checks++; if (dut.n_full_batches < 2) begin failures++; $display("full batches %0d", dut.n_full_batches); end
    checks++; if (dut.n_partial_batches < 4) begin failures++; $display("partial batches %0d", dut.n_partial_batches); end
    // launches: A 70, B 11, C 2, D 9
    checks++; if (dut.n_groups != 92) begin failures++; $display("launches %0d", dut.n_groups); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
