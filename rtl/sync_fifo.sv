// sync_fifo: per-engine FIFO between the memory scheduler and a CNN engine.
//
// The scheduler serves each engine in bursts, one slot at a time; these FIFOs
// absorb the bursts so that an engine sees a steady stream.  This is a plain
// synchronous FIFO (register array, read and write pointers) with valid/ready
// handshakes on both sides: a word is written when in_valid && in_ready and
// read when out_valid && out_ready.  It is first-word-fall-through, so out_data
// is valid in the same cycle out_valid is high.  `count` gives the occupancy,
// which the scheduler uses for its burst admission.  Depth is a parameter; the
// paper sets it per engine from its processing rate, and here it defaults to
// one burst so that a full slot always fits.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 1024
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  output logic                       in_ready,
  input  logic [WIDTH-1:0]           in_data,
  output logic                       out_valid,
  input  logic                       out_ready,
  output logic [WIDTH-1:0]           out_data,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic push, pop;

  assign in_ready  = (count != DEPTH[$bits(count)-1:0]);
  assign out_valid = (count != '0);
  assign out_data  = mem[rptr];
  assign push = in_valid && in_ready;
  assign pop  = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (push) mem[wptr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0;
    end else begin
      if (push) wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (pop)  rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (push ? 1'b1 : 1'b0) - (pop ? 1'b1 : 1'b0);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) count <= DEPTH);
endmodule
