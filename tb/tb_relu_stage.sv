// tb_relu_stage: self-checking test of the ReLU stage.
//
// Random Q8.8 values (both signs, including the extremes) go through with
// random stalls; each output must be max(0, x), in order.
module tb_relu_stage;
  import fcnnx_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  elem_t in_data, out_data;
  int checks = 0, failures = 0, negs = 0;
  elem_t q[$];

  relu_stage dut (.*);

  always_ff @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      q.push_back(in_data < 0 ? elem_t'(0) : in_data);
      if (in_data < 0) negs++;
    end
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || out_data != q[0]) begin failures++; $display("FAIL: %0d", out_data); end
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
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 1000; i++) begin
      @(negedge clk);
      if (!in_valid || in_ready) begin
        in_valid = ($urandom % 4) != 0;
        in_data = (i == 3) ? elem_t'(16'sh8000) : (i == 5) ? elem_t'(16'sh7fff) : elem_t'($urandom);
      end
      out_ready = ($urandom % 4) != 0;
    end
    @(negedge clk); while (in_valid && !in_ready) @(negedge clk);
    in_valid = 0; out_ready = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (q.size() != 0 || negs == 0) begin failures++; $display("FAIL: leftover"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
