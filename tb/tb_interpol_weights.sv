// tb_interpol_weights: random fractions; each corner weight compared with
// the reference, and the corner weights of a cell must add up to 1.0
// (65536) less at most one unit of truncation per multiply and corner.
module tb_interpol_weights;
  import nfp_pkg::*;
  import nfp_ref_pkg::*;
  int checks = 0, failures = 0;
  logic [1:0] dims;
  frac_t [2:0] frac;
  logic [2:0] corner;
  logic [16:0] weight;

  interpol_weights dut (.*);

  initial begin
    dims = 3; frac = '0; corner = 0; #1;
    checks++; if (weight != 17'h10000) failures++;   // at a vertex it gets full weight
    corner = 1; #1;
    checks++; if (weight != 0) failures++;
    for (int k = 0; k < 3000; k++) begin
      int sum;
      sum = 0;
      dims = ($urandom % 2) ? 2'd3 : 2'd2;
      for (int d = 0; d < 3; d++) frac[d] = 16'($urandom);
      for (int c = 0; c < (1 << dims); c++) begin
        corner = 3'(c); #1;
        sum += int'(weight);
        checks++;
        if (32'(weight) != ref_weight(dims, frac[0], frac[1], frac[2], c)) begin
          failures++; $display("weight mismatch c=%0d", c);
        end
      end
      checks++;
      if (sum > 65536 || sum < 65536 - 16) begin failures++; $display("sum %0d", sum); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
