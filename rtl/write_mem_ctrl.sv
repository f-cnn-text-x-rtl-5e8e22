// write_mem_ctrl: write memory controller of the memory scheduler.
//
// Takes a transfer (word address, transfer size in words) from the control
// unit and writes that many words, taken from the write staging buffer, to
// off-chip memory as fixed-length bursts of burst_len words (the last one
// shorter), one burst at a time, over a simplified AXI-style write channel:
// aw_* carries address and length, w_* the data with w_last on the final beat,
// and b_* the write response, which ends the burst.  `done` pulses for one cycle
// when the response of the transfer's last burst arrives.  The fixed burst
// length follows the paper; the bus is this design's simplification of AXI4.
module write_mem_ctrl
  import fcnnx_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic [LEN_W-1:0]  burst_len,
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  logic [ADDR_W-1:0] cmd_addr,
  input  logic [LEN_W-1:0]  cmd_size,
  output logic              done,
  // memory write channels
  output logic              aw_valid,
  input  logic              aw_ready,
  output logic [ADDR_W-1:0] aw_addr,
  output logic [LEN_W-1:0]  aw_len,
  output logic              w_valid,
  input  logic              w_ready,
  output word_t             w_data,
  output logic              w_last,
  input  logic              b_valid,
  output logic              b_ready,
  // from the write staging buffer
  input  logic              stg_valid,
  output logic              stg_ready,
  input  word_t             stg_data
);
  typedef enum logic [1:0] {IDLE, ADDR, DATA, RESP} state_e;
  state_e state;
  logic [ADDR_W-1:0] addr;
  logic [LEN_W-1:0]  left, beats;

  assign cmd_ready = (state == IDLE);
  assign aw_valid  = (state == ADDR);
  assign aw_addr   = addr;
  assign aw_len    = (left > burst_len) ? burst_len : left;
  assign w_valid   = (state == DATA) && stg_valid;
  assign w_data    = stg_data;
  assign w_last    = (beats == 1);
  assign stg_ready = (state == DATA) && w_ready;
  assign b_ready   = (state == RESP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE; addr <= '0; left <= '0; beats <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        IDLE: if (cmd_valid && cmd_size != '0) begin
          addr <= cmd_addr; left <= cmd_size; state <= ADDR;
        end else if (cmd_valid) begin
          done <= 1'b1;
        end
        ADDR: if (aw_ready) begin
          beats <= aw_len;
          left  <= left - aw_len;
          addr  <= addr + ADDR_W'(aw_len);
          state <= DATA;
        end
        DATA: if (w_valid && w_ready) begin
          beats <= beats - 1'b1;
          if (beats == 1) state <= RESP;
        end
        RESP: if (b_valid) begin
          if (left == '0) begin
            state <= IDLE; done <= 1'b1;
          end else state <= ADDR;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
