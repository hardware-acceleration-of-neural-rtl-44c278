// tb_weight_sram: writes all weights of the 8 matrices one at a time in
// random order, then reads every row and compares it with the model.
module tb_weight_sram;
  import nfp_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic we = 0;
  logic [8:0] waddr = 0, raddr = 0;
  logic [5:0] wcol = 0;
  mw_t wdata = 0;
  mw_row_t rdata;
  mw_row_t model [512];

  weight_sram #(.LAYERS(8)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 64; c++)
      for (int r = 0; r < 512; r++) begin
        int rr;
        rr = (r * 37 + c) % 512;
        we <= 1; waddr <= 9'(rr); wcol <= 6'(c); wdata <= mw_t'($urandom);
        @(posedge clk); #1;
        model[rr][c] = wdata;
      end
    we <= 0;
    for (int r = 0; r < 512; r++) begin
      raddr <= 9'(r);
      @(posedge clk); #1;
      checks++;
      if (rdata != model[r]) begin failures++; $display("row %0d", r); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
