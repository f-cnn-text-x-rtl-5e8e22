// word_pack: gathers PACK consecutive data elements into one memory word.
//
// The inverse of word_unpack: the first element of a group lands in the least
// significant bits.  A full word is held in an output register until the
// write-side FIFO takes it; while it waits, the next group still fills, and the
// input stalls only if both are full.  Packing follows the paper; bit order and
// the double buffering are this design's choice.
module word_pack
  import fcnnx_pkg::*;
#(
  parameter int unsigned N = PACK
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  elem_t         in_data,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [N*DATA_W-1:0] out_data
);
  logic [N*DATA_W-1:0] acc;
  logic [$clog2(N+1)-1:0] fill;
  logic acc_full, move;

  assign acc_full = (fill == ($bits(fill))'(N));
  assign move     = acc_full && (!out_valid || out_ready);
  assign in_ready = !acc_full || move;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc <= '0; fill <= '0; out_valid <= 1'b0; out_data <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (move) begin
        out_data  <= acc;
        out_valid <= 1'b1;
      end
      if (in_valid && in_ready) begin
        acc  <= (move ? '0 : acc) | ((N*DATA_W)'($unsigned(in_data)) << (DATA_W * (move ? 0 : int'(fill))));
        fill <= move ? ($bits(fill))'(1) : fill + 1'b1;
      end else if (move) begin
        acc  <= '0;
        fill <= '0;
      end
    end
  end
endmodule
