// staging_buffer: read or write staging buffer of the memory scheduler.
//
// It sits between a memory controller and the per-engine FIFOs and holds the
// words of the burst in flight, tagged with the engine they belong to, so that
// the burst can land at the memory's rate while the demultiplexer (read side)
// or the multiplexer (write side) moves them to/from the engine FIFOs.  It is
// a block-RAM FIFO: the array has one synchronous write and one synchronous
// read port, as a block RAM has, and a one-entry output register gives a
// first-word-fall-through valid/ready interface.  The read of the RAM is issued
// ahead whenever the output register is empty or being emptied, so throughput
// is one word per cycle.  The paper sizes these buffers from the largest
// subgraph storage need without giving a number; the default here is one
// burst (1024 words), an assumption.
module staging_buffer #(
  parameter int unsigned WIDTH = 68,
  parameter int unsigned DEPTH = 1024
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [WIDTH-1:0] in_data,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [WIDTH-1:0] out_data,
  output logic [$clog2(DEPTH+1)-1:0] count   // words held in the RAM
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic [WIDTH-1:0] ram [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic push, ram_rd, oreg_valid;
  logic [WIDTH-1:0] ram_q;
  logic ram_q_valid;

  assign in_ready = (count != DEPTH[$bits(count)-1:0]);
  assign push     = in_valid && in_ready;
  // Output stage: ram_q (registered RAM output) feeds oreg.
  logic oreg_load;
  assign out_valid = oreg_valid;
  assign oreg_load = ram_q_valid && (!oreg_valid || out_ready);
  // Read the RAM when data is there and the RAM-output register will be free.
  assign ram_rd = (count != '0) && (!ram_q_valid || oreg_load);

  always_ff @(posedge clk) begin
    if (push)   ram[wptr] <= in_data;
    if (ram_rd) ram_q     <= ram[rptr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; count <= '0;
      ram_q_valid <= 1'b0; oreg_valid <= 1'b0; out_data <= '0;
    end else begin
      if (push)   wptr <= (wptr == AW'(DEPTH-1)) ? '0 : wptr + 1'b1;
      if (ram_rd) rptr <= (rptr == AW'(DEPTH-1)) ? '0 : rptr + 1'b1;
      count <= count + (push ? 1'b1 : 1'b0) - (ram_rd ? 1'b1 : 1'b0);
      if (ram_rd)         ram_q_valid <= 1'b1;
      else if (oreg_load) ram_q_valid <= 1'b0;
      if (oreg_load) begin
        out_data   <= ram_q;
        oreg_valid <= 1'b1;
      end else if (out_ready) begin
        oreg_valid <= 1'b0;
      end
    end
  end
endmodule
