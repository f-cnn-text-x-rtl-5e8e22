// tb_pool_layer: self-checking test of the pooling stage.
//
// Two instances, 2x2 max pooling on a 6x6x3 map and 3x3 average pooling on a
// 7x7x2 map (whose last row and column do not fill a window and must be
// dropped), each take three random feature maps under random stalls.  Their
// outputs are compared with a direct loop-based pooling of the same maps.
module tb_pool_layer;
  import fcnnx_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic a_iv, a_ir, a_ov, a_or, b_iv, b_ir, b_ov, b_or;
  elem_t a_id, a_od, b_id, b_od;

  pool_layer #(.C(3), .H(6), .W(6), .P(2), .AVG(1'b0)) dut_max (
    .clk, .rst_n, .in_valid(a_iv), .in_ready(a_ir), .in_data(a_id),
    .out_valid(a_ov), .out_ready(a_or), .out_data(a_od));
  pool_layer #(.C(2), .H(7), .W(7), .P(3), .AVG(1'b1)) dut_avg (
    .clk, .rst_n, .in_valid(b_iv), .in_ready(b_ir), .in_data(b_id),
    .out_valid(b_ov), .out_ready(b_or), .out_data(b_od));

  elem_t exp_a[$], exp_b[$];

  always_ff @(posedge clk) if (rst_n) begin
    if (a_ov && a_or) begin
      checks++;
      if (exp_a.size() == 0 || a_od != exp_a[0]) begin failures++; $display("FAIL max: %0d vs %0d", a_od, exp_a[0]); end
      if (exp_a.size() > 0) void'(exp_a.pop_front());
    end
    if (b_ov && b_or) begin
      checks++;
      if (exp_b.size() == 0 || b_od != exp_b[0]) begin failures++; $display("FAIL avg: %0d vs %0d", b_od, exp_b[0]); end
      if (exp_b.size() > 0) void'(exp_b.pop_front());
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // race-free synchronous drivers: a new element is offered after the last was taken
  elem_t src_a[$], src_b[$];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_iv <= 0; b_iv <= 0; a_id <= '0; b_id <= '0; a_or <= 0; b_or <= 0;
    end else begin
      a_or <= ($urandom % 4) != 0;
      b_or <= ($urandom % 4) != 0;
      if (!a_iv || a_ir) begin
        if (src_a.size() > 0 && ($urandom % 3) != 0) begin a_iv <= 1; a_id <= src_a.pop_front(); end
        else a_iv <= 0;
      end
      if (!b_iv || b_ir) begin
        if (src_b.size() > 0 && ($urandom % 3) != 0) begin b_iv <= 1; b_id <= src_b.pop_front(); end
        else b_iv <= 0;
      end
    end
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      automatic elem_t xa[$], xb[$], ya[$], yb[$];
      for (int i = 0; i < 6 * 6 * 3; i++) xa.push_back(gen_elem(32'(f * 1000 + i), 0));
      for (int i = 0; i < 7 * 7 * 2; i++) xb.push_back(gen_elem(32'(f * 1000 + i), 1));
      ref_pool(3, 6, 6, 2, 1'b0, xa, ya);
      ref_pool(2, 7, 7, 3, 1'b1, xb, yb);
      foreach (ya[i]) exp_a.push_back(ya[i]);
      foreach (yb[i]) exp_b.push_back(yb[i]);
      foreach (xa[i]) src_a.push_back(xa[i]);
      foreach (xb[i]) src_b.push_back(xb[i]);
      while (src_a.size() > 0 || src_b.size() > 0) @(posedge clk);
    end
    repeat (20) @(negedge clk);
    checks++;
    if (exp_a.size() != 0 || exp_b.size() != 0) begin failures++; $display("FAIL: missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
