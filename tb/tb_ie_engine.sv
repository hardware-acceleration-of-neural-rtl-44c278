// tb_ie_engine: one IE engine at full table size (2^19 entries). For
// hashgrid (3-D, the NeRF/NSDF/NVR growth factors), densegrid (3-D, Nmin 16
// and 128) and 2-D (GIA) settings at several levels it loads the table
// entries that the reference says each sample touches, encodes random
// samples and compares the two features with the reference. Also checks
// the latency (2^dims+2 cycles from accept to out_valid), that the output
// holds while out_ready is low, and that in_ready stays low meanwhile.
module tb_ie_engine;
  import nfp_pkg::*;
  import nfp_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  enc_mode_e mode = ENC_HASH;
  logic [1:0] dims = 3;
  logic [4:0] log2_t = 19;
  logic [15:0] base_res = 16;
  logic [31:0] growth = 32'h10000;
  logic [3:0] level = 0;
  logic cfg_start = 0, tw_en = 0, in_valid = 0, in_ready, out_valid, out_ready = 1;
  logic [18:0] tw_addr = 0;
  grid_word_t tw_data = 0;
  coord_vec_t in_coord = '0;
  logic [N_FEAT-1:0][ACT_W-1:0] out_feat;

  ie_engine dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic configure(bit hash, int d, int l2t, int base, int g, int lvl);
    mode <= hash ? ENC_HASH : ENC_DENSE; dims <= 2'(d); log2_t <= 5'(l2t);
    base_res <= 16'(base); growth <= 32'(g); level <= 4'(lvl);
    @(posedge clk);
    cfg_start <= 1;
    @(posedge clk);
    cfg_start <= 0;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
  endtask

  task automatic encode_one(bit hash, int d, int l2t, int base, int g, int lvl, bit stall);
    int unsigned x[3];
    int f0, f1, lat;
    for (int k = 0; k < 3; k++) x[k] = $urandom % 65536;
    if (d == 2) x[2] = 0;
    // load every corner this sample touches
    for (int c = 0; c < (1 << d); c++) begin
      int unsigned idx;
      idx = ref_corner_index(hash, d, l2t, base, 64'(g), lvl, x[0], x[1], x[2], c);
      tw_en <= 1; tw_addr <= 19'(idx); tw_data <= 16'(table_word(lvl, idx));
      @(posedge clk);
    end
    tw_en <= 0;
    ref_encode(hash, d, l2t, base, 64'(g), lvl, x[0], x[1], x[2], f0, f1);
    in_valid <= 1; in_coord <= '{16'(x[2]), 16'(x[1]), 16'(x[0])};
    out_ready <= !stall;
    @(posedge clk);
    in_valid <= 0;
    lat = 0;
    #1;
    while (!out_valid) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != (1 << d) + 2) begin failures++; $display("latency %0d dims %0d", lat, d); end
    if (stall) begin
      repeat (5) begin
        @(posedge clk); #1;
        checks++;
        if (!out_valid || in_ready) begin failures++; $display("output not held"); end
      end
      out_ready <= 1;
    end
    checks++;
    if (out_feat[0] != 16'(f0) || out_feat[1] != 16'(f1)) begin
      failures++;
      $display("feat mismatch hash=%0d d=%0d lvl=%0d got %0d,%0d exp %0d,%0d", hash, d, lvl,
               $signed(out_feat[0]), $signed(out_feat[1]), f0, f1);
    end
    @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // hashgrid 3-D: NeRF b=1.51572, NSDF 1.38191, NVR 1.275
    for (int lvl = 0; lvl < 16; lvl += 3) begin
      configure(1, 3, 19, 16, 99334, lvl);
      repeat (6) encode_one(1, 3, 19, 16, 99334, lvl, 0);
      encode_one(1, 3, 19, 16, 99334, lvl, 1);
    end
    configure(1, 3, 19, 16, 90565, 15);
    repeat (6) encode_one(1, 3, 19, 16, 90565, 15, 0);
    // densegrid 3-D, b = 1.405, 8 levels, and the low-resolution Nmin=128, b=1
    for (int lvl = 0; lvl < 8; lvl += 2) begin
      configure(0, 3, 19, 16, 92078, lvl);
      repeat (6) encode_one(0, 3, 19, 16, 92078, lvl, 0);
    end
    configure(0, 3, 19, 128, 65536, 1);
    repeat (6) encode_one(0, 3, 19, 128, 65536, 1, 0);
    // 2-D (GIA), hash b = 1.25992 and dense; smaller table
    configure(1, 2, 19, 16, 82570, 9);
    repeat (6) encode_one(1, 2, 19, 16, 82570, 9, 0);
    configure(0, 2, 14, 16, 92078, 7);
    repeat (6) encode_one(0, 2, 14, 16, 92078, 7, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
