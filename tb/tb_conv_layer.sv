// tb_conv_layer: self-checking test of the streaming convolution stage.
//
// A 3x3 convolution from 2 to 4 feature maps on a 6x6 input, with 2 C-PEs
// (two folds) of 4 multipliers (18 taps: 5 chunks, the last partly empty),
// runs three subgraphs back to back, each with new random weights and a new
// input map, under random input gaps and output stalls.  Every output is
// compared with a direct convolution of the same data.  The test also checks
// that the input is stalled while a window is computed, and that a window
// takes no more than folds x (chunks + 6) cycles.
module tb_conv_layer;
  import fcnnx_pkg::*;
  import tb_ref_pkg::*;
  localparam int IC = 2, OC = 4, H = 6, W = 6, K = 3, NPE = 2, NOP = 4;
  localparam int NCH = (K * K * IC + NOP - 1) / NOP, G = OC / NPE;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid, in_ready, out_valid, out_ready, busy_compute;
  elem_t in_data, out_data;

  conv_layer #(.IN_CH(IC), .OUT_CH(OC), .H(H), .W(W), .K(K), .N_PE(NPE), .N_OP(NOP)) dut (.*);

  elem_t src[$], exp_q[$];
  int stall_cycles = 0, busy_run = 0, max_busy_run = 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_valid <= 0; in_data <= '0; out_ready <= 0;
    end else begin
      out_ready <= ($urandom % 4) != 0;
      if (!in_valid || in_ready) begin
        if (src.size() > 0 && ($urandom % 4) != 0) begin in_valid <= 1; in_data <= src.pop_front(); end
        else in_valid <= 0;
      end
      if (out_valid && out_ready) begin
        checks++;
        if (exp_q.size() == 0 || out_data != exp_q[0]) begin
          failures++; $display("FAIL: %0d vs %0d", out_data, exp_q.size() ? exp_q[0] : elem_t'(0));
        end
        if (exp_q.size() > 0) void'(exp_q.pop_front());
      end
      if (in_valid && !in_ready) stall_cycles++;
      if (busy_compute) busy_run++; else busy_run = 0;
      if (busy_run > max_busy_run) max_busy_run = busy_run;
    end
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    engine_cfg_t c;
    c = '0;
    c.in_ch = 8'(IC); c.out_ch = 8'(OC); c.h = 8'(H); c.w = 8'(W); c.k = 8'(K);
    repeat (3) @(posedge clk); rst_n = 1;
    for (int sgi = 0; sgi < 3; sgi++) begin
      automatic elem_t wt[$], x[$], y[$];
      for (int i = 0; i < OC * K * K * IC; i++) wt.push_back(gen_elem(32'(sgi * 5000 + i), 2));
      for (int i = 0; i < H * W * IC; i++) x.push_back(gen_elem(32'(sgi * 5000 + i), 3));
      ref_conv(c, wt, x, y);
      foreach (wt[i]) src.push_back(wt[i]);
      foreach (x[i]) src.push_back(x[i]);
      foreach (y[i]) exp_q.push_back(y[i]);
    end
    while (src.size() > 0 || exp_q.size() > 0) @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (stall_cycles == 0) begin failures++; $display("FAIL: input never stalled"); end
    checks++;
    if (max_busy_run > G * (NCH + 6)) begin failures++; $display("FAIL: window took %0d cycles", max_busy_run); end
    $display("stall cycles %0d, longest window %0d cycles", stall_cycles, max_busy_run);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
