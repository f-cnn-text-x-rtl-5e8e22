// tb_fcnnx_full: end-to-end test of the multi-CNN accelerator, with every parameter of
// the accelerator at its default (burst length 1024, four engines).
//
// The accelerator runs against the behavioural external memory until every
// engine has finished its whole list of subgraphs at least once (one inference
// of every CNN).  Then every output word each subgraph wrote is compared with
// the reference engine applied to that subgraph's input region.  The test also
// counts how often each scheduling mechanism occurred and fails if one never
// did: round-robin hand-over between engines, a burst shorter than the burst
// length, engine input stalls, convolution stalls, write bursts, subgraph
// switches and the wrap of the cyclic schedule.  Consecutive and given-up
// slots are only counted here: at a burst length of 1024 every default
// subgraph is read in one burst, so they need not occur; the reduced-size
// end-to-end test (tb_fcnnx_top) requires them.
module tb_fcnnx_full;
  import fcnnx_pkg::*;
  import tb_ref_pkg::*;

  localparam int unsigned N_ENG = 4;
  localparam int unsigned BL = 1024;
  localparam longint WATCHDOG = 4000000;

  logic clk = 1'b0, rst_n = 1'b0, run = 1'b0;
  always #5 clk = ~clk;

  logic ar_valid, ar_ready, r_valid, r_ready, r_last;
  logic aw_valid, aw_ready, w_valid, w_ready, w_last, b_valid, b_ready;
  logic [ADDR_W-1:0] ar_addr, aw_addr;
  logic [LEN_W-1:0] ar_len, aw_len;
  word_t r_data, w_data;
  logic [$clog2(MAX_SG)-1:0] sg_reg [N_ENG];
  logic [31:0] slots_used [N_ENG], sg_done [N_ENG], inferences [N_ENG];
  logic [31:0] slots_skipped;
  logic [N_ENG-1:0] conv_busy;

  fcnnx_top u_dut (
    .clk, .rst_n, .run,
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last,
    .aw_valid, .aw_ready, .aw_addr, .aw_len, .w_valid, .w_ready, .w_data, .w_last,
    .b_valid, .b_ready,
    .sg_reg, .slots_used, .slots_skipped, .sg_done, .inferences, .conv_busy
  );

  offchip_mem #(.LAT(8), .STALL(1'b0)) u_mem (
    .clk, .rst_n,
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last,
    .aw_valid, .aw_ready, .aw_addr, .aw_len, .w_valid, .w_ready, .w_data, .w_last,
    .b_valid, .b_ready
  );

  int checks = 0, failures = 0;
  longint cycles = 0;
  int n_handover = 0, n_consec = 0, n_short = 0, n_in_stall = 0, n_conv_stall = 0;
  int n_mem_stall = 0;
  int last_eng = -1;

  always_ff @(posedge clk) begin
    cycles <= cycles + 1;
    if (ar_valid && ar_ready) begin
      int e;
      e = int'(ar_addr / REGION_WORDS) / MAX_SG;
      if (last_eng >= 0 && e != last_eng) n_handover <= n_handover + 1;
      if (e == last_eng) n_consec <= n_consec + 1;
      if (int'(ar_len) < BL) n_short <= n_short + 1;
      last_eng <= e;
    end
    for (int e = 0; e < N_ENG; e++)
      if (u_dut.ei_valid[e] && !u_dut.ei_ready[e]) n_in_stall <= n_in_stall + 1;
    if (conv_busy != '0) n_conv_stall <= n_conv_stall + 1;
    if (r_ready && !r_valid && u_dut.u_hs.u_rd.state == 2'd2) n_mem_stall <= n_mem_stall + 1;
  end

  task automatic expect_true(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog after %0d cycles", WATCHDOG);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit all_done;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    run = 1'b1;
    do begin
      @(posedge clk);
      all_done = 1'b1;
      for (int e = 0; e < N_ENG; e++) if (inferences[e] == 0) all_done = 1'b0;
    end while (!all_done);
    // let write bursts of the next round finish
    repeat (50) @(posedge clk);
    $display("all engines finished one inference after %0d cycles", cycles);

    for (int e = 0; e < N_ENG; e++) begin
      engine_cfg_t c;
      c = DEFAULT_ENGINES[e];
      for (int j = 0; j < int'(c.n_sg); j++) begin
        elem_t s[$], y[$];
        int nwords, bad;
        logic [ADDR_W-1:0] rb, wb;
        rb = ADDR_W'((e * MAX_SG + j) * REGION_WORDS);
        wb = ADDR_W'(OUT_BASE + (e * MAX_SG + j) * REGION_WORDS);
        region_elems(rb, int'(ceil_div(weight_elems(c) + input_elems(c), PACK)), s);
        ref_engine(c, s, y);
        nwords = int'(ceil_div(output_elems(c), PACK));
        bad = 0;
        for (int a = 0; a < nwords; a++) begin
          word_t exp_w;
          for (int l = 0; l < PACK; l++) exp_w[l*DATA_W +: DATA_W] = y[a*PACK + l];
          checks++;
          if (!u_mem.mem.exists(wb + ADDR_W'(a)) || u_mem.mem[wb + ADDR_W'(a)] != exp_w) begin
            failures++; bad++;
            if (bad < 4) $display("FAIL: engine %0d subgraph %0d word %0d", e, j, a);
          end
        end
      end
      expect_true(sg_done[e] >= 32'(c.n_sg), $sformatf("engine %0d subgraph count", e));
      expect_true(slots_used[e] > 0, $sformatf("engine %0d used slots", e));
    end
    expect_true(u_mem.w_last_errors == 0, "w_last placement");

    $display("mechanisms: handover=%0d consecutive_slots=%0d skipped_slots=%0d short_bursts=%0d",
             n_handover, n_consec, slots_skipped, n_short);
    $display("            engine_input_stalls=%0d conv_stall_cycles=%0d mem_stalls=%0d",
             n_in_stall, n_conv_stall, n_mem_stall);
    $display("            write_bursts=%0d subgraph_switches=%0d", u_mem.bursts_written,
             sg_done[0] + sg_done[1] + sg_done[2] + sg_done[3]);
    expect_true(n_handover > 0, "round-robin hand-over happened");
    expect_true(n_short > 0, "short burst happened");
    expect_true(n_in_stall > 0, "engine input stall happened");
    expect_true(n_conv_stall > 0, "convolution stall happened");
    expect_true(u_mem.bursts_written > 0, "write bursts happened");
    // at this size every subgraph fits one burst, so no engine needs a
    // second consecutive slot and no slot is given up while data remain
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
