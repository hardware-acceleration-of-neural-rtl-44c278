// tb_grid_index: random cells and corners in hash and dense mode, 2-D and
// 3-D, several table sizes; index compared with the reference, and the
// index must always be below the table size (power-of-two modulo).
module tb_grid_index;
  import nfp_pkg::*;
  import nfp_ref_pkg::*;
  int checks = 0, failures = 0;
  enc_mode_e mode;
  logic [1:0] dims;
  logic [4:0] log2_t;
  logic [15:0] res;
  gint_t [2:0] pos_int;
  logic [2:0] corner;
  logic [18:0] index;

  grid_index dut (.*);

  initial begin
    // corner (0,0,0) of cell (0,0,0) hashes to 0; corner (1,0,0) to 1
    mode = ENC_HASH; dims = 3; log2_t = 19; res = 0; pos_int = '0; corner = 0; #1;
    checks++; if (index != 0) failures++;
    corner = 3'b001; #1;
    checks++; if (index != 1) failures++;
    // corner (0,1,0): 2654435761 mod 2^19
    corner = 3'b010; #1;
    checks++; if (index != 19'(32'd2654435761)) failures++;
    for (int k = 0; k < 5000; k++) begin
      mode   = enc_mode_e'($urandom % 2);
      dims   = ($urandom % 2) ? 2'd3 : 2'd2;
      log2_t = 5'(10 + $urandom % 10);
      res    = 16'(2 + $urandom % 1000);
      for (int d = 0; d < 3; d++) pos_int[d] = 16'($urandom % 4096);
      corner = 3'($urandom);
      #1;
      checks++;
      if (32'(index) != ref_index(mode == ENC_HASH, dims, log2_t, res,
                                  pos_int[0] + corner[0], pos_int[1] + corner[1], pos_int[2] + corner[2])) begin
        failures++; $display("index mismatch mode=%0d dims=%0d", mode, dims);
      end
      checks++;
      if (32'(index) >= (32'd1 << log2_t)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
