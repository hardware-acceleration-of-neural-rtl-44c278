// tb_mac_grid: loads random 64x64 weight matrices, streams random vectors
// back to back (one per cycle), and compares every output with the
// reference layer, with and without ReLU; includes vectors that saturate.
// Checks the one-cycle latency from in_valid to out_valid.
module tb_mac_grid;
  import nfp_pkg::*;
  import nfp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic w_we = 0, in_valid = 0, relu = 0, out_valid;
  logic [5:0] w_row = 0;
  mw_row_t w_data = '0;
  act_vec_t in_vec = '0, out_vec;
  int W[64][64];
  int exp_mem[256][64];
  int n_exp = 0, n_got = 0;

  mac_grid dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: outputs must come exactly one cycle after inputs
  always @(posedge clk) if (rst_n) begin
    if (out_valid) begin
      checks++;
      if (n_got >= n_exp) begin failures++; $display("unexpected output"); end
      else begin
        for (int j = 0; j < 64; j++) if (out_vec[j] != 16'(exp_mem[n_got][j])) begin
          failures++; $display("vec %0d out[%0d] %0d exp %0d", n_got, j, $signed(out_vec[j]), exp_mem[n_got][j]); break;
        end
      end
      n_got++;
    end
  end

  task automatic run(int scale_w, int scale_a, int nvec);
    for (int j = 0; j < 64; j++) begin
      mw_row_t r;
      for (int i = 0; i < 64; i++) begin
        W[j][i] = int'($signed(16'($urandom))) % scale_w;
        r[i] = mw_t'(W[j][i]);
      end
      w_we <= 1; w_row <= 6'(j); w_data <= r;
      @(posedge clk);
    end
    w_we <= 0;
    @(posedge clk);
    for (int k = 0; k < nvec; k++) begin
      int a[64];
      int y[64];
      act_vec_t v;
      bit rl;
      rl = $urandom % 2;
      for (int i = 0; i < 64; i++) begin a[i] = int'($signed(16'($urandom))) % scale_a; v[i] = act_t'(a[i]); end
      ref_layer(W, a, rl, y);
      exp_mem[n_exp] = y;
      n_exp++;
      in_valid <= 1; in_vec <= v; relu <= rl;
      @(posedge clk);
    end
    in_valid <= 0;
    @(posedge clk); @(posedge clk);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(512, 512, 40);      // ordinary range
    run(32768, 32768, 20);  // saturating range
    run(64, 4096, 40);
    checks++;
    if (n_got != n_exp) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
