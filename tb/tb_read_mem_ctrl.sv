// tb_read_mem_ctrl: self-checking test of the read memory controller.
//
// Issues read commands of 37, 16, 5 and 1 words with a burst length of 16
// against a memory model with latency and random handshake gaps, while the
// staging-buffer side also stalls at random.  Checks that each command is split
// into ceil(size/16) bursts, that every word arrives in order with the data at
// its address and the command's engine tag, and that done pulses once per
// command.
module tb_read_mem_ctrl;
  import fcnnx_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [LEN_W-1:0] burst_len;
  logic cmd_valid, cmd_ready, done;
  logic [ADDR_W-1:0] cmd_addr;
  logic [LEN_W-1:0] cmd_size;
  logic [1:0] cmd_tag;
  logic ar_valid, ar_ready, r_valid, r_ready, r_last, stg_valid, stg_ready;
  logic [ADDR_W-1:0] ar_addr;
  logic [LEN_W-1:0] ar_len;
  word_t r_data;
  logic [2+MEM_W-1:0] stg_data;
  logic aw_ready, w_ready, b_valid;

  read_mem_ctrl #(.TAG_W(2)) dut (.*);
  offchip_mem #(.LAT(4), .STALL(1'b1)) u_mem (
    .clk, .rst_n, .ar_valid, .ar_ready, .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last,
    .aw_valid(1'b0), .aw_ready, .aw_addr('0), .aw_len('0), .w_valid(1'b0), .w_ready,
    .w_data('0), .w_last(1'b0), .b_valid, .b_ready(1'b1));

  logic [2+MEM_W-1:0] exp_q[$];
  int dones = 0;

  always_ff @(posedge clk) begin
    if (rst_n) begin
      stg_ready <= ($urandom % 3) != 0;
      if (done) dones++;
      if (stg_valid && stg_ready) begin
        checks++;
        if (exp_q.size() == 0 || stg_data != exp_q[0]) begin
          failures++; $display("FAIL: staging word %h", stg_data);
        end
        if (exp_q.size() > 0) void'(exp_q.pop_front());
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  localparam int SZ [4] = '{37, 16, 5, 1};
  initial begin
    burst_len = 16; cmd_valid = 0; cmd_addr = '0; cmd_size = '0; cmd_tag = '0; stg_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 4; i++) begin
      automatic int b0 = u_mem.bursts_read, d0 = dones;
      automatic logic [ADDR_W-1:0] base = ADDR_W'(32'h1000 * (i + 1) + 3);
      for (int a = 0; a < SZ[i]; a++) exp_q.push_back({2'(i), gen_word(base + ADDR_W'(a))});
      @(negedge clk);
      cmd_valid = 1; cmd_addr = base; cmd_size = LEN_W'(SZ[i]); cmd_tag = 2'(i);
      @(posedge clk); while (!cmd_ready) @(posedge clk);
      @(negedge clk); cmd_valid = 0;
      while (dones == d0) @(posedge clk);
      repeat (3) @(posedge clk);
      checks++;
      if (exp_q.size() != 0) begin failures++; $display("FAIL: %0d words missing", exp_q.size()); end
      checks++;
      if (int'(u_mem.bursts_read) - b0 != (SZ[i] + 15) / 16) begin
        failures++; $display("FAIL: %0d bursts for %0d words", u_mem.bursts_read - b0, SZ[i]);
      end
      checks++;
      if (dones != d0 + 1) begin failures++; $display("FAIL: done pulsed %0d times", dones - d0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
