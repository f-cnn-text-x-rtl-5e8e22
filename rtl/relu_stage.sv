// relu_stage: the nonlinear stage of a CNN engine, y = max(0, x) on Q8.8 data.
//
// A single PE with one register slice: the result is registered and a
// valid/ready handshake is kept, so the stage also breaks the ready path of the
// pipeline.  The paper lists nonlinear stages with a tunable PE count; an
// engine here moves one element per cycle between stages, so one PE suffices.
module relu_stage
  import fcnnx_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  elem_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output elem_t out_data
);
  assign in_ready = !out_valid || out_ready;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; out_data <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_data <= in_data[DATA_W-1] ? '0 : in_data;
    end
  end
endmodule
