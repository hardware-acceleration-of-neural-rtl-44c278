// tb_grid_sram: writes random words at random addresses of the full 1 MB
// table, reads them back with one cycle of latency, and checks that a
// read in the same cycle as a write to the same address returns the old word.
module tb_grid_sram;
  import nfp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [18:0] waddr = 0, raddr = 0;
  grid_word_t wdata = 0, rdata;
  grid_word_t model [int unsigned];
  int unsigned addrs[$];

  grid_sram dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 2000; k++) begin
      int unsigned a;
      a = (k < 2) ? (k == 0 ? 0 : 19'h7ffff) : ($urandom % (1 << 19));
      we <= 1; waddr <= 19'(a); wdata <= 16'($urandom);
      @(posedge clk); #1;
      model[a] = wdata; addrs.push_back(a);
    end
    we <= 0;
    foreach (addrs[k]) begin
      raddr <= 19'(addrs[k]);
      @(posedge clk); #1;
      checks++;
      if (rdata != model[addrs[k]]) begin failures++; $display("addr %h", addrs[k]); end
    end
    // read-during-write: old data
    raddr <= 19'(addrs[0]); we <= 1; waddr <= 19'(addrs[0]); wdata <= ~model[addrs[0]];
    @(posedge clk); #1;
    checks++; if (rdata != model[addrs[0]]) failures++;
    we <= 0;
    @(posedge clk); #1;
    checks++; if (rdata != ~model[addrs[0]]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
