// cnn_block: one conv -> ReLU -> optional pooling block of a CNN engine.
//
// The convolution stage (N_PE C-PEs of N_OP multipliers, see conv_layer) feeds
// a ReLU register slice and, if POOL is not 0, a PxP pooling stage (max, or
// average when POOL_AVG is set).  All stages pass elements through valid/ready
// handshakes, one element per cycle at most, and stall when the next stage does
// not take their output.  Input per subgraph: the convolution's weights, then
// the input map, channel fastest.  Output: the pooled (or rectified) map in the
// same order.  conv_busy is high while the convolution computes a window.
// The stage types follow the published engine structure; grouping them as a
// fixed conv-ReLU-pool block is this design's choice.
module cnn_block
  import fcnnx_pkg::*;
#(
  parameter int unsigned IN_CH    = 2,
  parameter int unsigned OUT_CH   = 4,
  parameter int unsigned H        = 8,
  parameter int unsigned W        = 8,
  parameter int unsigned K        = 5,
  parameter int unsigned N_PE     = 4,
  parameter int unsigned N_OP     = 5,
  parameter int unsigned POOL     = 2,     // 0: no pooling stage
  parameter bit          POOL_AVG = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  elem_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output elem_t out_data,
  output logic  conv_busy
);
  localparam int unsigned HO = H - K + 1;
  localparam int unsigned WO = W - K + 1;

  logic  c_valid, c_ready, r_valid, r_ready;
  elem_t c_data, r_data;

  conv_layer #(.IN_CH(IN_CH), .OUT_CH(OUT_CH), .H(H), .W(W), .K(K),
               .N_PE(N_PE), .N_OP(N_OP)) u_conv (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(c_valid), .out_ready(c_ready), .out_data(c_data),
    .busy_compute(conv_busy)
  );

  relu_stage u_relu (
    .clk, .rst_n, .in_valid(c_valid), .in_ready(c_ready), .in_data(c_data),
    .out_valid(r_valid), .out_ready(r_ready), .out_data(r_data)
  );

  if (POOL != 0) begin : g_pool
    pool_layer #(.C(OUT_CH), .H(HO), .W(WO), .P(POOL), .AVG(POOL_AVG)) u_pool (
      .clk, .rst_n, .in_valid(r_valid), .in_ready(r_ready), .in_data(r_data),
      .out_valid, .out_ready, .out_data
    );
  end else begin : g_nopool
    assign out_valid = r_valid;
    assign r_ready   = out_ready;
    assign out_data  = r_data;
  end
endmodule
