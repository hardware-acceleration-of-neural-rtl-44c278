// tb_grid_scale: grid scales for the base resolutions and growth factors of
// the evaluated encodings (Nmin 16 or 128, b 1.51572 .. 1.0) at every level,
// compared with the reference; done must come level+1 cycles after start.
module tb_grid_scale;
  import nfp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic start = 0, busy, done;
  logic [15:0] base_res;
  logic [31:0] growth, scale;
  logic [3:0] level;
  longint unsigned g_tab[6] = '{99334, 90563, 92077, 83558, 82570, 65536}; // b*2^16

  grid_scale dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    base_res = 16; growth = 0; level = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 6; g++)
      for (int l = 0; l < 16; l++)
        for (int b = 0; b < 2; b++) begin
          int cyc;
          cyc = 0;
          base_res <= b ? 16'd128 : 16'd16;
          growth   <= 32'(g_tab[g]);
          level    <= 4'(l);
          start    <= 1;
          @(posedge clk);
          start <= 0;
          #1;
          do begin @(posedge clk); #1; cyc++; end while (!done);
          checks++;
          if (64'(scale) != ref_scale(b ? 128 : 16, g_tab[g], l)) begin
            failures++; $display("scale g=%0d l=%0d got %h exp %h", g, l, scale, ref_scale(b ? 128 : 16, g_tab[g], l));
          end
          checks++;
          if (cyc != l + 1) begin failures++; $display("latency %0d for level %0d", cyc, l); end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
