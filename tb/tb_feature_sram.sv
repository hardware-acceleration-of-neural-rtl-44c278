// tb_feature_sram: fills a 64-word feature buffer with random vectors and
// reads them back in random order with one cycle of latency.
module tb_feature_sram;
  import nfp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [5:0] waddr = 0, raddr = 0;
  act_vec_t wdata, rdata;
  act_vec_t model [64];

  feature_sram #(.DEPTH(64)) dut (.*);

  function automatic act_vec_t rnd_vec();
    act_vec_t v;
    for (int i = 0; i < 64; i++) v[i] = act_t'($urandom);
    return v;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wdata = '0;
    for (int a = 0; a < 64; a++) begin
      we <= 1; waddr <= 6'(a); wdata <= rnd_vec();
      @(posedge clk); #1;
      model[a] = wdata;
    end
    we <= 0;
    for (int k = 0; k < 500; k++) begin
      int a;
      a = $urandom % 64;
      raddr <= 6'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata != model[a]) begin failures++; $display("addr %0d", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
