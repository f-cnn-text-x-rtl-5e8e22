// pool_layer: pooling stage of a CNN engine (max or average, PxP, stride P).
//
// Input is a feature map of H x W pixels with C channels streamed one element
// per cycle, channel fastest, then column, then row.  The stage keeps one row
// of partial results (W/P x C entries): the first element of a pooling window
// initialises its entry, later elements are combined into it (max, or sum for
// average), and the element that completes a window (last row and column of
// the window) emits the result.  Output order is the same channel-fastest
// order of the pooled map.  Rows or columns beyond a whole window are dropped.
// Average pooling divides the window sum by P*P and truncates toward zero.
// One element enters per cycle; the input only stalls while a result waits
// in the output register.  Max and average pooling follow the paper; the
// streaming order and the row buffer are this design's.
module pool_layer
  import fcnnx_pkg::*;
#(
  parameter int unsigned C    = 4,
  parameter int unsigned H    = 6,
  parameter int unsigned W    = 6,
  parameter int unsigned P    = 2,
  parameter bit          AVG  = 1'b0
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  elem_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output elem_t out_data
);
  localparam int unsigned HP = H / P;
  localparam int unsigned WP = W / P;
  localparam int unsigned SUM_W = DATA_W + 2 * $clog2(P + 1);
  typedef logic signed [SUM_W-1:0] sum_t;

  sum_t part [WP * C];
  logic [$clog2(C+1)-1:0] ch;
  logic [$clog2(W+1)-1:0] col;
  logic [$clog2(H+1)-1:0] row;
  logic [$clog2(P+1)-1:0] cp, rp;      // position in_win the window
  logic [$clog2(WP+1)-1:0] cq;         // window column
  logic [$clog2(HP+1)-1:0] rq;         // window row

  logic take, in_win, first, last;
  int unsigned idx;
  sum_t xin, comb;

  assign in_ready = !out_valid || out_ready;
  assign take     = in_valid && in_ready;
  assign in_win   = (int'(cq) < WP) && (int'(rq) < HP);
  assign first    = (cp == '0) && (rp == '0);
  assign last     = (int'(cp) == P - 1) && (int'(rp) == P - 1);
  assign idx      = int'(cq) * C + int'(ch);
  assign xin      = SUM_W'(in_data);

  always_comb begin
    if (first)    comb = xin;
    else if (AVG) comb = part[idx] + xin;
    else          comb = (xin > part[idx]) ? xin : part[idx];
  end

  always_ff @(posedge clk) begin
    if (take && in_win) part[idx] <= comb;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ch <= '0; col <= '0; row <= '0; cp <= '0; rp <= '0; cq <= '0; rq <= '0;
      out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (take) begin
        if (in_win && last) begin
          out_valid <= 1'b1;
          out_data  <= AVG ? elem_t'(comb / sum_t'(P * P)) : elem_t'(comb);
        end
        // advance channel / column / row counters
        if (int'(ch) == C - 1) begin
          ch <= '0;
          if (int'(col) == W - 1) begin
            col <= '0; cp <= '0; cq <= '0;
            if (int'(row) == H - 1) begin
              row <= '0; rp <= '0; rq <= '0;
            end else begin
              row <= row + 1'b1;
              if (int'(rp) == P - 1) begin rp <= '0; rq <= rq + 1'b1; end
              else rp <= rp + 1'b1;
            end
          end else begin
            col <= col + 1'b1;
            if (int'(cp) == P - 1) begin cp <= '0; cq <= cq + 1'b1; end
            else cp <= cp + 1'b1;
          end
        end else begin
          ch <= ch + 1'b1;
        end
      end
    end
  end
endmodule
