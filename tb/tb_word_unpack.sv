// tb_word_unpack: self-checking test of word unpacking.
//
// Random 64-bit words go in; the four 16-bit elements of each must come out in
// order, lane 0 (least significant bits) first, under random output stalls.
// With no stalls, 32 words must yield 128 elements in about 128 cycles.
module tb_word_unpack;
  import fcnnx_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [63:0] in_data;
  elem_t out_data;
  int checks = 0, failures = 0, outs = 0;
  elem_t q[$];

  word_unpack dut (.*);

  always_ff @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) for (int l = 0; l < 4; l++) q.push_back(elem_t'(in_data[16*l +: 16]));
    if (out_valid && out_ready) begin
      checks++; outs++;
      if (q.size() == 0 || out_data != q[0]) begin failures++; $display("FAIL: %h", out_data); end
      if (q.size() > 0) void'(q.pop_front());
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
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin in_valid = ($urandom % 2); in_data = {$urandom, $urandom}; end
      out_ready = ($urandom % 3) != 0;
    end
    @(negedge clk); while (in_valid && !in_ready) @(negedge clk);
    in_valid = 0; out_ready = 1;
    repeat (10) @(negedge clk);
    o0 = outs; c0 = 0;
    for (int i = 0; i < 32; i++) begin
      in_valid = 1; in_data = {$urandom, $urandom};
      @(negedge clk); c0++;
      while (!in_ready) begin @(negedge clk); c0++; end
    end
    in_valid = 0;
    repeat (6) @(negedge clk);
    checks++;
    if (outs - o0 != 128 || c0 > 132) begin failures++; $display("FAIL: rate %0d in %0d", outs - o0, c0); end
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL: leftover"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
