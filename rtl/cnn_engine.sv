// cnn_engine: one CNN engine, a coarse streaming pipeline dedicated to one CNN.
//
// Stages: word unpacking -> one or two conv-ReLU-pool blocks (cnn_block) ->
// word packing.  The engine is data-driven: every stage works whenever data
// arrive at its input and stalls through valid/ready when its output is not
// taken, so a slower input stream (fewer memory slots) slows the whole engine
// down proportionally; that is the property the scheduler's slow-downs rely on.
//
// Per subgraph the engine consumes the first block's conv weights, then the
// second block's conv weights (when K2 != 0), then one input feature map (see
// conv_layer for the orders).  A splitter counts the elements of the stream
// and steers the second block's weights straight to it; the second block then
// takes the first block's output map.  The engine produces the last block's
// output map, channel fastest, packed four elements per 64-bit word.
// conv_busy is high while either convolution computes a window.
//
// The chain of convolution, nonlinear and pooling stages and their per-stage
// parallelism follow the published engine; limiting an engine to at most two
// fixed conv-ReLU-pool blocks, the same for all its subgraphs, is this
// design's simplification of the per-CNN pipelines a toolflow would generate.
// The weight plus input element count and the output element count of a
// subgraph must both be multiples of four, so that every subgraph starts and
// ends on a word boundary (checked at elaboration).
module cnn_engine
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
  parameter bit          POOL_AVG = 1'b0,
  // optional second conv -> ReLU -> pooling block (K2 = 0: none)
  parameter int unsigned K2        = 0,
  parameter int unsigned OUT_CH2   = 4,
  parameter int unsigned N_PE2     = 1,
  parameter int unsigned N_OP2     = 1,
  parameter int unsigned POOL2     = 0,
  parameter bit          POOL2_AVG = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  word_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output word_t out_data,
  output logic  conv_busy
);
  localparam int unsigned HO  = H - K + 1;
  localparam int unsigned WO  = W - K + 1;
  localparam int unsigned HP  = (POOL == 0) ? HO : HO / POOL;   // first block output
  localparam int unsigned WP  = (POOL == 0) ? WO : WO / POOL;
  localparam int unsigned HO2 = (K2 == 0) ? 1 : HP - K2 + 1;
  localparam int unsigned WO2 = (K2 == 0) ? 1 : WP - K2 + 1;
  localparam int unsigned NW1 = OUT_CH * IN_CH * K * K;          // first block weights
  localparam int unsigned NW2 = (K2 == 0) ? 0 : OUT_CH2 * OUT_CH * K2 * K2;
  localparam int unsigned NX  = H * W * IN_CH;
  localparam int unsigned N1  = HP * WP * OUT_CH;                 // first block outputs
  localparam int unsigned N_IN  = NW1 + NW2 + NX;
  localparam int unsigned N_OUT = (K2 == 0) ? N1
                                : ((POOL2 == 0) ? HO2 * WO2 : (HO2 / POOL2) * (WO2 / POOL2)) * OUT_CH2;
  if (N_IN % PACK != 0 || N_OUT % PACK != 0) begin : g_bad_shape
    $error("cnn_engine: subgraph input and output must fill whole words");
  end

  logic  u_valid, u_ready, b1_valid, b1_ready, o_valid, o_ready;
  elem_t u_data, b1_data, o_data;
  logic  busy1, busy2;

  word_unpack u_unpack (
    .clk, .rst_n, .in_valid, .in_ready, .in_data,
    .out_valid(u_valid), .out_ready(u_ready), .out_data(u_data)
  );

  // Input splitter: elements [NW1, NW1+NW2) of each subgraph's stream are the
  // second block's weights; everything else goes to the first block.
  logic [$clog2(N_IN+1)-1:0] idx;
  logic to2, s1_valid, s1_ready, w2_valid, w2_ready;
  assign to2      = (NW2 != 0) && (int'(idx) >= NW1) && (int'(idx) < NW1 + NW2);
  assign s1_valid = u_valid && !to2;
  assign w2_valid = u_valid && to2;
  assign u_ready  = to2 ? w2_ready : s1_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) idx <= '0;
    else if (u_valid && u_ready)
      idx <= (int'(idx) == N_IN - 1) ? '0 : idx + 1'b1;
  end

  cnn_block #(.IN_CH(IN_CH), .OUT_CH(OUT_CH), .H(H), .W(W), .K(K), .N_PE(N_PE), .N_OP(N_OP),
              .POOL(POOL), .POOL_AVG(POOL_AVG)) u_b1 (
    .clk, .rst_n, .in_valid(s1_valid), .in_ready(s1_ready), .in_data(u_data),
    .out_valid(b1_valid), .out_ready(b1_ready), .out_data(b1_data), .conv_busy(busy1)
  );

  if (K2 != 0) begin : g_b2
    // second block input: its weights from the splitter, then the first
    // block's output map
    logic [$clog2(NW2+1)-1:0] w2_cnt;
    logic [$clog2(N1+1)-1:0]  x2_cnt;
    logic sel_w, b2_valid, b2_ready;
    elem_t b2_data;
    assign sel_w    = (int'(w2_cnt) < NW2);
    assign b2_valid = sel_w ? w2_valid : b1_valid;
    assign b2_data  = sel_w ? u_data   : b1_data;
    assign w2_ready = sel_w && b2_ready;
    assign b1_ready = !sel_w && b2_ready;

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        w2_cnt <= '0; x2_cnt <= '0;
      end else if (b2_valid && b2_ready) begin
        if (sel_w) w2_cnt <= w2_cnt + 1'b1;
        else if (int'(x2_cnt) == N1 - 1) begin x2_cnt <= '0; w2_cnt <= '0; end
        else x2_cnt <= x2_cnt + 1'b1;
      end
    end

    cnn_block #(.IN_CH(OUT_CH), .OUT_CH(OUT_CH2), .H(HP), .W(WP), .K(K2), .N_PE(N_PE2),
                .N_OP(N_OP2), .POOL(POOL2), .POOL_AVG(POOL2_AVG)) u_b2 (
      .clk, .rst_n, .in_valid(b2_valid), .in_ready(b2_ready), .in_data(b2_data),
      .out_valid(o_valid), .out_ready(o_ready), .out_data(o_data), .conv_busy(busy2)
    );
  end else begin : g_one
    assign w2_ready = 1'b0;
    assign o_valid  = b1_valid;
    assign b1_ready = o_ready;
    assign o_data   = b1_data;
    assign busy2    = 1'b0;
  end

  assign conv_busy = busy1 || busy2;

  word_pack u_pack (
    .clk, .rst_n, .in_valid(o_valid), .in_ready(o_ready), .in_data(o_data),
    .out_valid, .out_ready, .out_data
  );
endmodule
