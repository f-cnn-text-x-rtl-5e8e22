// tb_mcnn_cu: self-checking test of the scheduler's control unit on the
// worked example of the scheduling scheme.
//
// Three engines hold 1, 2 and 4 consecutive slots of a 1024-word burst and
// must read 16384, 16384 and 32768 elements (4096, 4096 and 8192 64-bit words)
// per subgraph.  The test bench models the configuration table (a real
// config_table with this content), the read controller (one word per cycle)
// and the engines' input FIFOs (each engine drains one word per cycle).
// Checks:
//  * the burst order is 0,1,1,2,2,2,2 in every round-robin period;
//  * over ten periods the engines get 10, 20 and 40 bursts, the bandwidth
//    shares 1/7, 2/7 and 4/7 (14.28 %, 28.57 %, 57.14 %);
//  * engine 0 finishes its subgraph in the fourth period (burst 22), engines 1
//    and 2 in the second (bursts 10 and 14), and each subgraph restarts
//    cyclically (inference counters);
//  * a burst costs at most 1024 + 8 cycles of port time;
//  * an engine whose FIFO is full gives up its slots (skipped-slot counter)
//    while the others keep the port busy, and resumes when it drains.
module tb_mcnn_cu;
  import fcnnx_pkg::*;
  localparam int N = 3, BL = 1024, DEPTH = 2048;
  localparam int CW = $clog2(DEPTH + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  function automatic cfg_table_t example_table();
    cfg_table_t t = '0;
    cfg_entry_t x;
    for (int e = 0; e < N; e++) begin
      x = '0;
      x.rd_base  = ADDR_W'(e * 32'h10000);
      x.rd_words = LEN_W'((e == 2) ? 8192 : 4096);
      x.slots    = SLOT_W'(1 << e);
      t[e][0] = x;
    end
    return t;
  endfunction

  logic run, tbl_lookup, tbl_valid;
  logic [$clog2(MAX_ENG)-1:0] tbl_eng;
  logic [$clog2(MAX_SG)-1:0] tbl_sg;
  cfg_entry_t tbl_entry;
  logic rd_cmd_valid, rd_cmd_ready, rd_done;
  logic [ADDR_W-1:0] rd_cmd_addr, wr_cmd_addr;
  logic [LEN_W-1:0] rd_cmd_size, wr_cmd_size;
  logic [1:0] rd_cmd_eng, wsel;
  logic [N-1:0] rfifo_pop;
  logic wr_cmd_valid, wcopy_en;
  logic [CW-1:0] wfifo_count [N];
  logic [$clog2(MAX_SG)-1:0] sg_reg [N];
  logic [31:0] slots_used [N], sg_done [N], inferences [N], slots_skipped;

  config_table #(.TABLE(example_table())) u_tbl (
    .clk, .rst_n, .lookup(tbl_lookup), .eng(tbl_eng), .sg(tbl_sg),
    .entry_valid(tbl_valid), .entry(tbl_entry));

  mcnn_cu #(.N_ENG(N), .FIFO_DEPTH(DEPTH)) dut (
    .clk, .rst_n, .run, .burst_len(LEN_W'(BL)), .tbl_lookup, .tbl_eng, .tbl_sg, .tbl_valid,
    .tbl_entry, .rd_cmd_valid, .rd_cmd_ready, .rd_cmd_addr, .rd_cmd_size, .rd_cmd_eng, .rd_done,
    .rfifo_pop, .wr_cmd_valid, .wr_cmd_ready(1'b0), .wr_cmd_addr, .wr_cmd_size, .wr_done(1'b0),
    .wfifo_count, .wcopy_en, .wsel, .wcopy_fire(1'b0), .sg_reg, .slots_used, .slots_skipped,
    .sg_done, .inferences);

  always_comb for (int e = 0; e < N; e++) wfifo_count[e] = '0;

  // read controller and engine FIFO model
  int fill [N];
  logic stall [N];
  int left, cur, cyc = 0, burst_start = 0, max_burst = 0, nb = 0;
  int log_q[$];
  int done_at [N][$];
  logic [31:0] prev_done [N];

  assign rd_cmd_ready = (left == 0) && !rd_done;
  always_comb for (int e = 0; e < N; e++) rfifo_pop[e] = (fill[e] > 0) && !stall[e];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left <= 0; cur <= 0; rd_done <= 0;
      for (int e = 0; e < N; e++) begin fill[e] <= 0; prev_done[e] <= '0; end
    end else begin
      cyc++;
      rd_done <= 0;
      for (int e = 0; e < N; e++) begin
        automatic int f = fill[e];
        if (rfifo_pop[e]) f--;
        if (left > 0 && cur == e) f++;
        if (f > DEPTH) begin failures++; $display("FAIL: FIFO %0d overflow", e); end
        fill[e] <= f;
        if (sg_done[e] != prev_done[e]) done_at[e].push_back(nb);
        prev_done[e] <= sg_done[e];
      end
      if (left > 0) begin
        left <= left - 1;
        if (left == 1) begin
          rd_done <= 1; nb++;
          if (cyc - burst_start > max_burst) max_burst = cyc - burst_start;
          burst_start = cyc;
        end
      end
      if (rd_cmd_valid && rd_cmd_ready) begin
        left <= int'(rd_cmd_size); cur <= int'(rd_cmd_eng);
        log_q.push_back(int'(rd_cmd_eng));
        if (rd_cmd_size != LEN_W'(BL)) begin failures++; $display("FAIL: size %0d", rd_cmd_size); end
      end
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  localparam int PAT [7] = '{0, 1, 1, 2, 2, 2, 2};
  initial begin
    int cnt [N];
    int sk0;
    run = 0;
    for (int e = 0; e < N; e++) stall[e] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2) @(posedge clk); run = 1;
    while (nb < 70) @(posedge clk);
    repeat (5) @(posedge clk);
    // burst order and shares over ten periods
    for (int e = 0; e < N; e++) cnt[e] = 0;
    for (int i = 0; i < 70; i++) begin
      checks++;
      if (log_q[i] != PAT[i % 7]) begin failures++; $display("FAIL: burst %0d went to engine %0d", i, log_q[i]); end
      cnt[log_q[i]]++;
    end
    for (int e = 0; e < N; e++) begin
      checks++;
      if (cnt[e] != 10 << e) begin failures++; $display("FAIL: engine %0d got %0d bursts", e, cnt[e]); end
      $display("engine %0d: %0d of 70 bursts = %0.2f %%", e, cnt[e], 100.0 * cnt[e] / 70.0);
    end
    // subgraph completion times (in bursts served)
    checks++;
    if (done_at[0].size() < 1 || done_at[0][0] != 22) begin failures++; $display("FAIL: engine 0 completion"); end
    checks++;
    if (done_at[1].size() < 1 || done_at[1][0] != 10) begin failures++; $display("FAIL: engine 1 completion"); end
    checks++;
    if (done_at[2].size() < 1 || done_at[2][0] != 14) begin failures++; $display("FAIL: engine 2 completion"); end
    for (int e = 0; e < N; e++) begin
      checks++;
      if (inferences[e] != sg_done[e] || sg_done[e] != 32'(cnt[e] / (e == 2 ? 8 : 4))) begin
        failures++; $display("FAIL: engine %0d done %0d inferences %0d", e, sg_done[e], inferences[e]);
      end
      checks++;
      sk0 = 0;
      foreach (log_q[i]) if (log_q[i] == e) sk0++;
      if (slots_used[e] != 32'(sk0)) begin failures++; $display("FAIL: slots_used %0d", e); end
    end
    checks++;
    if (max_burst > BL + 8) begin failures++; $display("FAIL: burst took %0d cycles", max_burst); end
    checks++;
    if (slots_skipped != 0) begin failures++; $display("FAIL: %0d slots skipped", slots_skipped); end
    // stop engine 1 draining: it must give up slots, engine 0 and 2 go on
    sk0 = 0;
    stall[1] = 1;
    while (nb < 91) @(posedge clk);
    checks++;
    if (slots_skipped == 0) begin failures++; $display("FAIL: no slot skipped"); end
    sk0 = 0;
    for (int i = 84; i < 91; i++) if (log_q[i] == 1) sk0++;
    checks++;
    if (sk0 != 0) begin failures++; $display("FAIL: stalled engine still read"); end
    stall[1] = 0;
    while (nb < 120) @(posedge clk);
    sk0 = 0;
    for (int i = 105; i < 120; i++) if (log_q[i] == 1) sk0++;
    checks++;
    if (sk0 == 0) begin failures++; $display("FAIL: engine 1 did not resume"); end
    $display("skipped slots %0d, longest burst %0d cycles", slots_skipped, max_burst);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
