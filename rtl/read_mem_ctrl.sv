// read_mem_ctrl: read memory controller of the memory scheduler.
//
// Takes a transfer (word address, transfer size in words, engine tag) from the
// control unit and reads it from off-chip memory as fixed-length bursts of
// burst_len words (the last one shorter if the size is not a multiple), one
// burst outstanding at a time, over a simplified AXI-style read channel
// (ar_* address, r_* data).  Every data beat is forwarded, tagged with the
// engine, to the read staging buffer; r_ready follows the buffer's ready.
// `done` pulses for one cycle with the transfer's last beat.  The burst length
// is fixed across all transactions as in the paper; the bus is this design's
// simplification of an AXI4 master (no id, size or burst-type fields).
module read_mem_ctrl
  import fcnnx_pkg::*;
#(
  parameter int unsigned TAG_W = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LEN_W-1:0]  burst_len,
  // command from the control unit
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic [ADDR_W-1:0] cmd_addr,
  input  logic [LEN_W-1:0]  cmd_size,
  input  logic [TAG_W-1:0]  cmd_tag,
  output logic              done,
  // memory read channels
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [ADDR_W-1:0] ar_addr,
  output logic [LEN_W-1:0]  ar_len,
  input  logic              r_valid,
  output logic              r_ready,
  input  word_t             r_data,
  input  logic              r_last,
  // to the read staging buffer
  output logic              stg_valid,
  input  logic              stg_ready,
  output logic [TAG_W+MEM_W-1:0] stg_data
);
  typedef enum logic [1:0] {IDLE, ADDR, DATA} state_e;
  state_e state;
  logic [ADDR_W-1:0] addr;
  logic [LEN_W-1:0]  left;       // words of the transfer not yet requested
  logic [LEN_W-1:0]  beats;      // beats left in the current burst
  logic [TAG_W-1:0]  tag;

  assign cmd_ready = (state == IDLE);
  assign ar_valid  = (state == ADDR);
  assign ar_addr   = addr;
  assign ar_len    = (left > burst_len) ? burst_len : left;
  assign r_ready   = (state == DATA) && stg_ready;
  assign stg_valid = (state == DATA) && r_valid;
  assign stg_data  = {tag, r_data};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; addr <= '0; left <= '0; beats <= '0; tag <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (cmd_valid && cmd_size != '0) begin
          addr <= cmd_addr; left <= cmd_size; tag <= cmd_tag; state <= ADDR;
        end else if (cmd_valid) begin
          done <= 1'b1;
        end
        ADDR: if (ar_ready) begin
          beats <= ar_len;
          left  <= left - ar_len;
          addr  <= addr + ADDR_W'(ar_len);
          state <= DATA;
        end
        DATA: if (r_valid && r_ready) begin
          beats <= beats - 1'b1;
          if (beats == 1) begin
            if (left == '0) begin
              state <= IDLE; done <= 1'b1;
            end else state <= ADDR;
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_last: assert property (@(posedge clk) disable iff (!rst_n)
    (r_valid && r_ready) |-> (r_last == (beats == 1)));
endmodule
