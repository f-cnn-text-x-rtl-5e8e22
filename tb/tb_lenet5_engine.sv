// tb_lenet5_engine: the convolutional part of LeNet-5 (Caffe version) on one
// two-block CNN engine.
//
// Layer sizes are those of the Caffe LeNet-5 model: a 28x28 grey-scale input,
// conv 5x5 to 20 maps, 2x2 max pooling, conv 5x5 to 50 maps, 2x2 max pooling
// (the two fully-connected layers that follow are not part of this engine).
// Block 1 uses 4 C-PEs of 5 multipliers (five folds), block 2 uses 10 C-PEs of
// 25 multipliers (five folds, 20 chunks per window).  One subgraph streams
// 500 + 25000 weights and the 784-pixel image (6571 words) and must produce
// the 4x4x50 output map (200 words).  The values come from the address hash of
// the test data generator, with a ReLU after each convolution; the output is
// compared word for word with the reference engine.  The test also reports the
// cycle count and checks it against a bound: the weights enter one element per
// cycle (25500 cycles), then each block needs at most windows x folds x
// (chunks + 6) cycles (24*24*5*11 and 8*8*5*26), plus a margin for the
// pixels of incomplete windows and the pipeline fill.
module tb_lenet5_engine;
  import fcnnx_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam engine_cfg_t C = '{in_ch:8'd1, out_ch:8'd20, h:8'd28, w:8'd28, k:8'd5, n_pe:8'd4,
                                n_op:8'd5, pool:8'd2, pool_avg:1'b0, n_sg:8'd1, slots:8'd1,
                                k2:8'd5, out_ch2:8'd50, n_pe2:8'd10, n_op2:8'd25, pool2:8'd2,
                                pool2_avg:1'b0};
  localparam int BOUND = 25500 + 24 * 24 * 5 * (5 + 6) + 8 * 8 * 5 * (20 + 6) + 2000;

  logic iv, ir, ov, orr, busy;
  word_t id, od;

  cnn_engine #(.IN_CH(1), .OUT_CH(20), .H(28), .W(28), .K(5), .N_PE(4), .N_OP(5), .POOL(2),
               .K2(5), .OUT_CH2(50), .N_PE2(10), .N_OP2(25), .POOL2(2)) dut (
    .clk, .rst_n, .in_valid(iv), .in_ready(ir), .in_data(id),
    .out_valid(ov), .out_ready(orr), .out_data(od), .conv_busy(busy));

  word_t src[$], exp_q[$];
  int cyc = 0, last_out = 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      iv <= 0; id <= '0; orr <= 0;
    end else begin
      cyc++;
      orr <= 1'b1;
      if (!iv || ir) begin
        if (src.size() > 0) begin iv <= 1; id <= src.pop_front(); end
        else iv <= 0;
      end
      if (ov && orr) begin
        checks++;
        last_out = cyc;
        if (exp_q.size() == 0 || od != exp_q[0]) begin failures++; $display("FAIL: word %h", od); end
        if (exp_q.size() > 0) void'(exp_q.pop_front());
      end
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    elem_t s[$], y[$];
    int nw;
    nw = int'(ceil_div(weight_elems(C) + input_elems(C), PACK));
    region_elems(32'h0, nw, s);
    for (int a = 0; a < nw; a++) src.push_back(gen_word(ADDR_W'(a)));
    ref_engine(C, s, y);
    for (int a = 0; a < y.size() / PACK; a++) begin
      word_t w;
      for (int l = 0; l < PACK; l++) w[l*DATA_W +: DATA_W] = y[a*PACK + l];
      exp_q.push_back(w);
    end
    $display("LeNet-5 conv layers: %0d input words, %0d output words", nw, exp_q.size());
    repeat (3) @(posedge clk); rst_n = 1;
    while (exp_q.size() > 0) @(posedge clk);
    checks++;
    if (last_out > BOUND) begin failures++; $display("FAIL: %0d cycles, bound %0d", last_out, BOUND); end
    $display("output complete after %0d cycles (bound %0d)", last_out, BOUND);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
