// tb_cnn_engine: self-checking test of a whole CNN engine.
//
// Two engines are tested: conv 5x5 (2 -> 4 maps, 8x8 input, 4 C-PEs of 5
// multipliers) + ReLU + 2x2 max pooling, and conv 3x3 (1 -> 4 maps, 6x6 input,
// one C-PE with a 9-wide fully parallel dot product) + ReLU without pooling,
// followed by a second block, conv 3x3 (4 -> 4 maps, 2 C-PEs of 12
// multipliers) + ReLU, which takes its weights from the engine's input stream.
// Each receives, as packed 64-bit words, the weights and input maps of three
// subgraphs, taken from the generated memory contents, with random gaps and
// output stalls.  The packed output words are compared with the reference
// engine.
module tb_cnn_engine;
  import fcnnx_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam engine_cfg_t CA = '{in_ch:8'd2, out_ch:8'd4, h:8'd8, w:8'd8, k:8'd5, n_pe:8'd4,
                                 n_op:8'd5, pool:8'd2, pool_avg:1'b0, n_sg:8'd3, slots:8'd1,
                                 k2:8'd0, out_ch2:8'd0, n_pe2:8'd0, n_op2:8'd0, pool2:8'd0, pool2_avg:1'b0};
  localparam engine_cfg_t CB = '{in_ch:8'd1, out_ch:8'd4, h:8'd6, w:8'd6, k:8'd3, n_pe:8'd1,
                                 n_op:8'd9, pool:8'd0, pool_avg:1'b0, n_sg:8'd3, slots:8'd1,
                                 k2:8'd3, out_ch2:8'd4, n_pe2:8'd2, n_op2:8'd12, pool2:8'd0, pool2_avg:1'b0};

  logic iv [2], ir [2], ov [2], orr [2], busy [2];
  word_t id [2], od [2];

  cnn_engine #(.IN_CH(2), .OUT_CH(4), .H(8), .W(8), .K(5), .N_PE(4), .N_OP(5), .POOL(2)) dut_a (
    .clk, .rst_n, .in_valid(iv[0]), .in_ready(ir[0]), .in_data(id[0]),
    .out_valid(ov[0]), .out_ready(orr[0]), .out_data(od[0]), .conv_busy(busy[0]));
  cnn_engine #(.IN_CH(1), .OUT_CH(4), .H(6), .W(6), .K(3), .N_PE(1), .N_OP(9), .POOL(0),
               .K2(3), .OUT_CH2(4), .N_PE2(2), .N_OP2(12)) dut_b (
    .clk, .rst_n, .in_valid(iv[1]), .in_ready(ir[1]), .in_data(id[1]),
    .out_valid(ov[1]), .out_ready(orr[1]), .out_data(od[1]), .conv_busy(busy[1]));

  word_t src [2][$];
  word_t exp_q [2][$];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < 2; e++) begin iv[e] <= 0; id[e] <= '0; orr[e] <= 0; end
    end else begin
      for (int e = 0; e < 2; e++) begin
        orr[e] <= ($urandom % 4) != 0;
        if (!iv[e] || ir[e]) begin
          if (src[e].size() > 0 && ($urandom % 4) != 0) begin iv[e] <= 1; id[e] <= src[e].pop_front(); end
          else iv[e] <= 0;
        end
        if (ov[e] && orr[e]) begin
          checks++;
          if (exp_q[e].size() == 0 || od[e] != exp_q[e][0]) begin
            failures++; $display("FAIL: engine %0d word %h", e, od[e]);
          end
          if (exp_q[e].size() > 0) void'(exp_q[e].pop_front());
        end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    for (int e = 0; e < 2; e++)
      for (int sgi = 0; sgi < 3; sgi++) begin
        automatic engine_cfg_t c = (e == 0) ? CA : CB;
        automatic elem_t s[$], y[$];
        automatic int nw = int'(ceil_div(weight_elems(c) + input_elems(c), PACK));
        automatic logic [ADDR_W-1:0] base = ADDR_W'((e * 8 + sgi) * 4096);
        region_elems(base, nw, s);
        for (int a = 0; a < nw; a++) src[e].push_back(gen_word(base + ADDR_W'(a)));
        ref_engine(c, s, y);
        for (int a = 0; a < y.size() / PACK; a++) begin
          word_t w;
          for (int l = 0; l < PACK; l++) w[l*DATA_W +: DATA_W] = y[a*PACK + l];
          exp_q[e].push_back(w);
        end
      end
    while (src[0].size() > 0 || src[1].size() > 0 || exp_q[0].size() > 0 || exp_q[1].size() > 0)
      @(posedge clk);
    repeat (10) @(posedge clk);
    checks++;
    if (ov[0] || ov[1]) begin failures++; $display("FAIL: extra output"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
