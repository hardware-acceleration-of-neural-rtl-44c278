// tb_pos_fract: random coordinates and grid scales; integer cell and
// in-cell fraction compared with the reference split of the product.
module tb_pos_fract;
  import nfp_pkg::*;
  import nfp_ref_pkg::*;
  int checks = 0, failures = 0;
  coord_vec_t coord;
  logic [31:0] scale;
  gint_t [2:0] pos_int;
  frac_t [2:0] pos_frac;

  pos_fract dut (.*);

  initial begin
    for (int k = 0; k < 3000; k++) begin
      for (int d = 0; d < 3; d++) coord[d] = 16'($urandom);
      scale = (k % 2) ? $urandom : ($urandom % (32'd2048 << 16));
      #1;
      for (int d = 0; d < 3; d++) begin
        int unsigned pi, pf;
        ref_pos(coord[d], scale, pi, pf);
        checks++;
        if (pos_int[d] != 16'(pi) || pos_frac[d] != 16'(pf)) begin
          failures++; $display("d=%0d x=%h s=%h got %h.%h", d, coord[d], scale, pos_int[d], pos_frac[d]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
