// tb_sync_fifo: self-checking test of the register-array FIFO.
//
// Random pushes and pops (with random stalls on both sides) are checked
// against a queue: every word must come out once, in order, the buffer must
// refuse words only when it holds DEPTH of them, and a steady stream must move
// one word per cycle.
module tb_sync_fifo;
  localparam int DEPTH = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;

  sync_fifo #(.WIDTH(16), .DEPTH(DEPTH)) dut (.*);

  logic [15:0] q[$];
  int held = 0, pushes = 0, pops = 0, refused = 0;
  int phase = 0;

  always_ff @(posedge clk) if (rst_n) begin
    held = q.size();
    if (in_valid && in_ready) begin q.push_back(in_data); pushes++; end
    if (out_valid && out_ready) begin
      checks++;
      if (q.size() == 0 || out_data != q[0]) begin
        failures++; $display("FAIL: data %h", out_data);
      end
      if (q.size() > 0) void'(q.pop_front());
      pops++;
    end
    if (in_valid && !in_ready) begin
      refused++;
      checks++;
      if (held < DEPTH) begin failures++; $display("FAIL: refused with %0d held", held); end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      in_valid = ($urandom % 3) != 0;
      in_data = 16'($urandom);
      out_ready = (i < 1000) ? (($urandom % 4) == 0) : (($urandom % 3) != 0);
    end
    // drain
    @(negedge clk); in_valid = 0; out_ready = 1;
    repeat (2 * DEPTH + 4) @(negedge clk);
    checks++;
    if (q.size() != 0 || out_valid) begin failures++; $display("FAIL: not drained"); end
    // throughput: 100 words back to back
    t0 = pops;
    for (int i = 0; i < 100; i++) begin
      @(negedge clk); in_valid = 1; in_data = 16'(i); out_ready = 1;
    end
    @(negedge clk); in_valid = 0;
    repeat (4) @(negedge clk);
    checks++;
    if (pops - t0 != 100) begin failures++; $display("FAIL: throughput %0d", pops - t0); end
    checks++;
    if (refused == 0) begin failures++; $display("FAIL: never full"); end
    $display("pushes=%0d pops=%0d refused=%0d", pushes, pops, refused);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
