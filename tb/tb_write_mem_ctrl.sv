// tb_write_mem_ctrl: self-checking test of the write memory controller.
//
// Writes transfers of 37, 16 and 3 words with a burst length of 16 through a
// memory model with random handshake gaps, feeding the words from a staging
// side that has random gaps too.  Checks that the memory holds every word at
// its address, that each transfer used ceil(size/16) bursts with w_last on the
// last beat of each, and that done pulses once per transfer, after the last
// write response.
module tb_write_mem_ctrl;
  import fcnnx_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [LEN_W-1:0] burst_len;
  logic cmd_valid, cmd_ready, done;
  logic [ADDR_W-1:0] cmd_addr;
  logic [LEN_W-1:0] cmd_size;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready, stg_valid, stg_ready;
  logic [ADDR_W-1:0] aw_addr;
  logic [LEN_W-1:0] aw_len;
  word_t w_data, stg_data;
  logic ar_ready, r_valid, r_last;
  word_t r_data;

  write_mem_ctrl dut (.*);
  offchip_mem #(.LAT(4), .STALL(1'b1)) u_mem (
    .clk, .rst_n, .ar_valid(1'b0), .ar_ready, .ar_addr('0), .ar_len('0), .r_valid,
    .r_ready(1'b1), .r_data, .r_last, .aw_valid, .aw_ready, .aw_addr, .aw_len, .w_valid,
    .w_ready, .w_data, .w_last, .b_valid, .b_ready);

  word_t src[$];
  int dones = 0;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      stg_valid <= 0; stg_data <= '0;
    end else begin
      if (done) dones++;
      if (!stg_valid || stg_ready) begin
        if (src.size() > 0 && ($urandom % 3) != 0) begin stg_valid <= 1; stg_data <= src.pop_front(); end
        else stg_valid <= 0;
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  localparam int SZ [3] = '{37, 16, 3};
  initial begin
    burst_len = 16; cmd_valid = 0; cmd_addr = '0; cmd_size = '0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3; i++) begin
      automatic int b0 = u_mem.bursts_written, d0 = dones;
      automatic logic [ADDR_W-1:0] base = ADDR_W'(32'h2000 * (i + 1) + 5);
      for (int a = 0; a < SZ[i]; a++) src.push_back(~gen_word(base + ADDR_W'(a)));
      @(negedge clk);
      cmd_valid = 1; cmd_addr = base; cmd_size = LEN_W'(SZ[i]);
      @(posedge clk); while (!cmd_ready) @(posedge clk);
      @(negedge clk); cmd_valid = 0;
      while (dones == d0) @(posedge clk);
      repeat (3) @(posedge clk);
      for (int a = 0; a < SZ[i]; a++) begin
        checks++;
        if (u_mem.rd(base + ADDR_W'(a)) != ~gen_word(base + ADDR_W'(a))) begin
          failures++; $display("FAIL: word %0d of transfer %0d", a, i);
        end
      end
      checks++;
      if (int'(u_mem.bursts_written) - b0 != (SZ[i] + 15) / 16) begin
        failures++; $display("FAIL: %0d bursts", u_mem.bursts_written - b0);
      end
      checks++;
      if (dones != d0 + 1 || src.size() != 0) begin failures++; $display("FAIL: done/words"); end
    end
    checks++;
    if (u_mem.w_last_errors != 0) begin failures++; $display("FAIL: w_last errors"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
