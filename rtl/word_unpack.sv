// word_unpack: splits each packed memory word into PACK data elements.
//
// The memory port is wider than the 16-bit data, so the scheduler moves words
// holding PACK elements each (four Q8.8 values per 64-bit word); a CNN engine
// consumes one element at a time.  Element 0 sits in the least significant
// bits.  One element leaves per cycle while out_ready is high; a new word is
// accepted in the cycle its last element leaves, so a steady stream keeps one
// element per cycle.  Packing follows the paper; the bit order is assumed.
module word_unpack
  import fcnnx_pkg::*;
#(
  parameter int unsigned N = PACK
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  logic [N*DATA_W-1:0] in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output elem_t         out_data
);
  logic [N*DATA_W-1:0] buf_q;
  logic [$clog2(N+1)-1:0] left;   // elements still to send from buf_q
  logic last_out;

  assign out_valid = (left != '0);
  assign out_data  = elem_t'(buf_q[DATA_W-1:0]);
  assign last_out  = out_valid && out_ready && (left == 1);
  assign in_ready  = (left == '0) || last_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_q <= '0; left <= '0;
    end else if (in_valid && in_ready) begin
      buf_q <= in_data;
      left  <= ($bits(left))'(N);
    end else if (out_valid && out_ready) begin
      buf_q <= buf_q >> DATA_W;
      left  <= left - 1'b1;
    end
  end
endmodule
