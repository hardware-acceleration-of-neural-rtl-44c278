// tb_input_fifo: random valid/ready traffic through a 16-deep FIFO, compared
// with a queue; also checks that in_ready drops exactly when 16 words are
// held and that a word is readable the cycle after it is written.
module tb_input_fifo;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic in_valid = 0, out_ready = 0, in_ready, out_valid;
  logic [31:0] in_data, out_data;
  logic [4:0] count;
  logic [31:0] q[$];
  bit saw_full = 0;

  input_fifo #(.T(logic [31:0]), .DEPTH(16)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    // fill to full
    for (int k = 0; k < 20; k++) begin
      in_valid <= 1; in_data <= 32'(k) * 7 + 1;
      @(posedge clk);
      if (in_ready) q.push_back(32'(k) * 7 + 1);
      #1;
    end
    in_valid <= 0;
    @(posedge clk); #1;
    checks++; if (in_ready || count != 16) begin failures++; $display("full not flagged %0d", count); end
    else saw_full = 1;
    // random traffic
    for (int k = 0; k < 4000; k++) begin
      in_valid  <= ($urandom % 3) != 0;
      out_ready <= ($urandom % 2) != 0;
      in_data   <= $urandom;
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (q.size() == 0 || out_data != q[0]) begin failures++; $display("mismatch %h", out_data); end
        if (q.size() != 0) void'(q.pop_front());
      end
      if (in_valid && in_ready) q.push_back(in_data);
      #1;
      checks++;
      if (count != 5'(q.size())) begin failures++; $display("count %0d vs %0d", count, q.size()); end
    end
    // drain: every held word must come out, then out_valid must drop
    in_valid <= 0; out_ready <= 1;
    for (int k = 0; k < 20; k++) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (q.size() == 0 || out_data != q[0]) begin failures++; $display("drain mismatch %h", out_data); end
        if (q.size() != 0) void'(q.pop_front());
      end
      #1;
    end
    checks++; if (q.size() != 0 || out_valid) begin failures++; $display("drain left %0d", q.size()); end
    // a single word is readable the cycle after it is written
    in_valid <= 1; in_data <= 32'h5a5a1234;
    @(posedge clk); #1;
    in_valid <= 0;
    checks++; if (!out_valid || out_data != 32'h5a5a1234) begin failures++; $display("fall-through failed"); end
    checks++; if (!saw_full) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
