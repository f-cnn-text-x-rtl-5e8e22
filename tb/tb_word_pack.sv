// tb_word_pack: self-checking test of word packing.
//
// Random elements go in under random input gaps and output stalls; every
// group of four must come out as one word with the first element in the least
// significant bits.  With no stalls, 128 elements must take about 128 cycles.
module tb_word_pack;
  import fcnnx_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  elem_t in_data;
  logic [63:0] out_data;
  int checks = 0, failures = 0, outs = 0;
  elem_t q[$];

  word_pack dut (.*);

  always_ff @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) q.push_back(in_data);
    if (out_valid && out_ready) begin
      logic [63:0] e;
      checks++; outs++;
      for (int l = 0; l < 4; l++) e[16*l +: 16] = (q.size() > l) ? q[l] : 16'h0;
      if (q.size() < 4 || out_data != e) begin failures++; $display("FAIL: %h vs %h", out_data, e); end
      repeat (4) if (q.size() > 0) void'(q.pop_front());
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int c0, o0;
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 800; i++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin in_valid = ($urandom % 2); in_data = elem_t'($urandom); end
      out_ready = ($urandom % 4) != 0;
    end
    @(negedge clk); while (in_valid && !in_ready) @(negedge clk);
    in_valid = 0; out_ready = 1;
    // complete a partial group so the queue is a whole number of words
    while (q.size() % 4 != 0) begin
      in_valid = 1; in_data = elem_t'($urandom);
      @(negedge clk); while (!in_ready) @(negedge clk);
    end
    in_valid = 0;
    repeat (10) @(negedge clk);
    o0 = outs; c0 = 0;
    for (int i = 0; i < 128; i++) begin
      in_valid = 1; in_data = elem_t'(i);
      @(negedge clk); c0++;
      while (!in_ready) begin @(negedge clk); c0++; end
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (outs - o0 != 32 || c0 > 130) begin failures++; $display("FAIL: rate %0d in %0d", outs - o0, c0); end
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: leftover %0d", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
