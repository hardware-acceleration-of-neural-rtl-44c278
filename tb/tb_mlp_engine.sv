// tb_mlp_engine: loads random weights, fills the input memory with a batch
// of random vectors, and checks every output vector against the reference
// MLP (ReLU on all layers but the last). Covers a full 64-vector batch with
// 3 layers, a short final batch with `last`, 1 and 5 layer networks, random
// output back-pressure, and the timing: the first output valid 1 + L*(nb+67)
// clock edges after the edge that samples batch_go, the input memory released (ib_free) while later
// layers still run, so the next batch can be written during them.
module tb_mlp_engine;
  import nfp_pkg::*;
  import nfp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [3:0] n_layers = 3;
  logic ww_en = 0;
  logic [2:0] ww_layer = 0;
  logic [5:0] ww_row = 0, ww_col = 0;
  mw_t ww_data = 0;
  logic ib_free, ib_we = 0, batch_go = 0, batch_last = 0;
  logic [5:0] ib_addr = 0;
  act_vec_t ib_data = '0, out_vec;
  logic [6:0] batch_count = 0;
  logic out_valid, out_ready = 1, out_last, busy;

  mlp_engine #(.BATCH_MAX(64)) dut (.*);

  int W[8][64][64];
  int A[64][64];       // current batch inputs
  int E[64][64];       // expected outputs
  int overlap_seen = 0;

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_weights(int nl);
    for (int l = 0; l < nl; l++)
      for (int r = 0; r < 64; r++)
        for (int c = 0; c < 64; c++) begin
          W[l][r][c] = int'($urandom % 97) - 48;
          ww_en <= 1; ww_layer <= 3'(l); ww_row <= 6'(r); ww_col <= 6'(c); ww_data <= mw_t'(W[l][r][c]);
          @(posedge clk);
        end
    ww_en <= 0;
  endtask

  task automatic fill(int nb);
    while (!ib_free) @(posedge clk);
    for (int v = 0; v < nb; v++) begin
      act_vec_t vec;
      for (int i = 0; i < 64; i++) begin
        A[v][i] = int'($urandom % 1024) - 512;
        vec[i] = 16'(A[v][i]);
      end
      ib_we <= 1; ib_addr <= 6'(v); ib_data <= vec;
      @(posedge clk);
    end
    ib_we <= 0;
  endtask

  task automatic model(int nb, int nl);
    for (int v = 0; v < nb; v++) begin
      int a[64], y[64];
      a = A[v];
      for (int l = 0; l < nl; l++) begin
        ref_layer(W[l], a, l != nl - 1, y);
        a = y;
      end
      E[v] = a;
    end
  endtask

  // run one batch; if next_nb > 0, fill the next batch as soon as ib_free
  task automatic run_batch(int nb, int nl, bit last, bit random_ready, int next_nb);
    int lat, got;
    bit first_seen;
    first_seen = 0;
    model(nb, nl);
    n_layers <= 4'(nl);
    @(posedge clk);
    batch_go <= 1; batch_count <= 7'(nb); batch_last <= last;
    @(posedge clk);
    batch_go <= 0;
    lat = 0;     // clock edges since the one that sampled batch_go
    got = 0;
    fork
      begin
        if (next_nb > 0) begin
          @(posedge clk);
          fill(next_nb);
          if (busy) overlap_seen++;
        end
      end
      begin
        #1;
        while (got < nb) begin
          if (out_valid && got == 0 && !first_seen) begin
            first_seen = 1;
            checks++;
            if (lat != 1 + nl * (nb + 67)) begin failures++; $display("first output after %0d cycles", lat); end
          end
          if (out_valid && out_ready) begin
            checks++;
            for (int j = 0; j < 64; j++) if (out_vec[j] != 16'(E[got][j])) begin
              failures++; $display("vec %0d lane %0d got %0d exp %0d", got, j, $signed(out_vec[j]), E[got][j]);
              break;
            end
            checks++;
            if (out_last != (last && got == nb - 1)) begin failures++; $display("out_last wrong at %0d", got); end
            got++;
          end
          @(posedge clk);
          out_ready <= random_ready ? ($urandom % 3 != 0) : 1'b1;
          #1;
          lat++;
        end
        out_ready <= 1;
      end
    join
    while (busy) @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    load_weights(5);
    fill(64);
    run_batch(64, 3, 0, 0, 5);        // next batch written during layers 2-3
    run_batch(5, 3, 1, 1, 0);
    fill(17);
    run_batch(17, 1, 0, 1, 0);
    fill(33);
    run_batch(33, 5, 1, 0, 0);
    checks++;
    if (overlap_seen == 0) begin failures++; $display("input memory never refilled during a batch"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
