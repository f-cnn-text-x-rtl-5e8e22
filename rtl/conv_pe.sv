// conv_pe: convolution processing element (C-PE) with its weights memory.
//
// A C-PE computes output feature-map values as dot products of input windows
// with the weights of one output map.  Its dot-product unit has N_OP
// multipliers feeding an adder tree; a window of T taps is processed in
// ceil(T/N_OP) chunks (operator folding), N_OP = 1 being a single
// multiply-accumulate and N_OP = T a fully parallel unit.  An accumulator sums
// the chunks.  The weights memory holds DEPTH rows of N_OP weights; each row is
// one chunk of one output map, so a PE time-shared over several output maps
// (PE folding) holds all of their rows.
//
// Timing: a chunk is presented with in_valid, the row address w_rd_addr, its
// N_OP inputs, and flags first (clear the accumulator) and last (finish the
// dot product).  The weights row is read synchronously (one cycle), the
// products, tree and accumulation take the next cycle, and for a `last` chunk
// res_valid pulses two cycles after in_valid with the Q8.8 result: the
// Q16.16 sum shifted right by 8 (toward minus infinity) and saturated to 16
// bits.  A chunk may be presented every cycle.  Weights are written one at a
// time through w_we / w_wr_addr / w_lane.  The multiplier array, adder tree and
// weights memory are as the paper draws the C-PE; rounding, saturation and the
// pipeline depth are this design's choices.
module conv_pe
  import fcnnx_pkg::*;
#(
  parameter int unsigned N_OP  = 5,
  parameter int unsigned DEPTH = 10
) (
  input  logic  clk,
  input  logic  rst_n,
  // weights load
  input  logic                         w_we,
  input  logic [$clog2(DEPTH+1)-1:0]   w_wr_addr,
  input  logic [$clog2(N_OP+1)-1:0]    w_lane,
  input  elem_t                        w_data,
  // compute
  input  logic                         in_valid,
  input  logic [$clog2(DEPTH+1)-1:0]   w_rd_addr,
  input  elem_t                        x [N_OP],
  input  logic                         first,
  input  logic                         last,
  output logic                         res_valid,
  output elem_t                        res
);
  typedef logic signed [ACC_W-1:0] acc_t;

  elem_t wmem [DEPTH][N_OP];
  elem_t w_q [N_OP];
  elem_t x_q [N_OP];
  logic  v_q, first_q, last_q;
  acc_t  acc, dot, acc_next;

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_wr_addr][w_lane] <= w_data;
    w_q <= wmem[w_rd_addr];
    x_q <= x;
  end

  // multiplier array and adder tree
  always_comb begin
    acc_t prod [N_OP];
    for (int i = 0; i < N_OP; i++)
      prod[i] = acc_t'(x_q[i]) * acc_t'(w_q[i]);
    for (int span = 1; span < N_OP; span = span * 2)
      for (int i = 0; i + span < N_OP; i = i + 2 * span)
        prod[i] = prod[i] + prod[i + span];
    dot = prod[0];
  end

  assign acc_next = (first_q ? acc_t'(0) : acc) + dot;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0;
      acc <= '0; res_valid <= 1'b0; res <= '0;
    end else begin
      v_q     <= in_valid;
      first_q <= first;
      last_q  <= last;
      res_valid <= 1'b0;
      if (v_q) begin
        acc <= acc_next;
        if (last_q) begin
          res_valid <= 1'b1;
          res       <= sat16(acc_next >>> FRAC_W);
        end
      end
    end
  end
endmodule
