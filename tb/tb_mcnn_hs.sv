// tb_mcnn_hs: self-checking test of the complete hardware scheduler.
//
// Two engines with a burst length of 8 words: engine 0 (1 slot) runs two
// subgraphs reading 20 and 11 words and writing 10 and 3; engine 1 (2 slots)
// runs one subgraph reading 13 words and writing 5.  The engines are modelled
// by the test bench: they take input words at random, and once a subgraph's
// input has been consumed they emit its output words at random.  The memory
// model stalls at random.  Checks: every engine receives exactly the words of
// its subgraphs' regions, in order and cyclically; every output word lands at
// its address; the bursts read and written match the table, and every word read reaches its engine; the subgraph
// and inference counters agree with the words moved.
module tb_mcnn_hs;
  import fcnnx_pkg::*;
  import tb_ref_pkg::*;
  localparam int N = 2, BL = 8;
  localparam int NS [N] = '{2, 1};
  localparam int RDW [N][2] = '{'{20, 11}, '{13, 0}};
  localparam int WRW [N][2] = '{'{10, 3}, '{5, 0}};
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  function automatic cfg_table_t small_table();
    cfg_table_t t = '0;
    cfg_entry_t x;
    for (int e = 0; e < N; e++)
      for (int j = 0; j < NS[e]; j++) begin
        x = '0;
        x.rd_base  = ADDR_W'((e * 8 + j) * 32'h100);
        x.rd_words = LEN_W'(RDW[e][j]);
        x.wr_base  = ADDR_W'(32'h10000 + (e * 8 + j) * 32'h100);
        x.wr_words = LEN_W'(WRW[e][j]);
        x.slots    = SLOT_W'(e + 1);
        t[e][j] = x;
      end
    return t;
  endfunction
  function automatic word_t out_word(int e, int j, int k);
    return {16'(e + 1), 16'(j), 32'(k * 7 + 3)};
  endfunction

  logic run;
  logic eng_in_valid [N], eng_in_ready [N], eng_out_valid [N], eng_out_ready [N];
  word_t eng_in_data [N], eng_out_data [N];
  logic ar_valid, ar_ready, r_valid, r_ready, r_last, aw_valid, aw_ready, w_valid, w_ready;
  logic w_last, b_valid, b_ready;
  logic [ADDR_W-1:0] ar_addr, aw_addr;
  logic [LEN_W-1:0] ar_len, aw_len;
  word_t r_data, w_data;
  logic [$clog2(MAX_SG)-1:0] sg_reg [N];
  logic [31:0] slots_used [N], sg_done [N], inferences [N], slots_skipped;

  mcnn_hs #(.N_ENG(N), .BURST_LEN(BL), .TABLE(small_table())) dut (.*);
  offchip_mem #(.LAT(3), .STALL(1'b1)) u_mem (.*);

  // engine models
  int rx_sg [N], rx_k [N], rx_words [N], passes [N];
  word_t oq [N][$];
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < N; e++) begin
        eng_in_ready[e] <= 0; eng_out_valid[e] <= 0; eng_out_data[e] <= '0;
        rx_sg[e] <= 0; rx_k[e] <= 0; rx_words[e] <= 0; passes[e] <= 0;
      end
    end else begin
      for (int e = 0; e < N; e++) begin
        eng_in_ready[e] <= ($urandom % 3) != 0;
        if (eng_in_valid[e] && eng_in_ready[e]) begin
          automatic logic [ADDR_W-1:0] a = ADDR_W'((e * 8 + rx_sg[e]) * 32'h100 + rx_k[e]);
          checks++;
          if (eng_in_data[e] != gen_word(a)) begin
            failures++; $display("FAIL: engine %0d got %h expected word at %h", e, eng_in_data[e], a);
          end
          rx_words[e] <= rx_words[e] + 1;
          if (rx_k[e] == RDW[e][rx_sg[e]] - 1) begin
            for (int k = 0; k < WRW[e][rx_sg[e]]; k++) oq[e].push_back(out_word(e, rx_sg[e], k));
            rx_k[e] <= 0;
            if (rx_sg[e] == NS[e] - 1) begin rx_sg[e] <= 0; passes[e] <= passes[e] + 1; end
            else rx_sg[e] <= rx_sg[e] + 1;
          end else rx_k[e] <= rx_k[e] + 1;
        end
        if (!eng_out_valid[e] || eng_out_ready[e]) begin
          if (oq[e].size() > 0 && ($urandom % 3) != 0) begin
            eng_out_valid[e] <= 1; eng_out_data[e] <= oq[e].pop_front();
          end else eng_out_valid[e] <= 0;
        end
      end
    end
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    int rd_bursts, wr_words;
    run = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2) @(posedge clk); run = 1;
    while (inferences[0] < 3 || inferences[1] < 3) @(posedge clk);
    run = 0;
    repeat (200) @(posedge clk);
    rd_bursts = 0; wr_words = 0;
    for (int e = 0; e < N; e++) begin
      for (int j = 0; j < NS[e]; j++) begin
        rd_bursts += int'(sg_done[e]) / NS[e] * ((RDW[e][j] + BL - 1) / BL);
        wr_words  += int'(sg_done[e]) / NS[e] * WRW[e][j];
        for (int k = 0; k < WRW[e][j]; k++) begin
          checks++;
          if (u_mem.rd(ADDR_W'(32'h10000 + (e * 8 + j) * 32'h100 + k)) != out_word(e, j, k)) begin
            failures++; $display("FAIL: output %0d/%0d/%0d", e, j, k);
          end
        end
      end
      checks++;
      if (int'(sg_done[e]) != NS[e] * int'(inferences[e]) || int'(inferences[e]) != passes[e]) begin
        failures++; $display("FAIL: engine %0d: %0d subgraphs, %0d inferences, %0d passes",
                             e, sg_done[e], inferences[e], passes[e]);
      end
      checks++;
      if (oq[e].size() != 0) begin failures++; $display("FAIL: engine %0d output left", e); end
    end
    checks++;
    // a subgraph started before run dropped may have read some more bursts
    if (int'(u_mem.bursts_read) < rd_bursts || int'(u_mem.bursts_read) > rd_bursts + N ||
        int'(u_mem.words_read) != rx_words[0] + rx_words[1]) begin
      failures++; $display("FAIL: %0d bursts read, expected %0d", u_mem.bursts_read, rd_bursts);
    end
    checks++;
    if (int'(u_mem.words_written) != wr_words || u_mem.w_last_errors != 0) begin
      failures++; $display("FAIL: %0d words written, expected %0d", u_mem.words_written, wr_words);
    end
    $display("subgraphs %0d/%0d, skipped slots %0d", sg_done[0], sg_done[1], slots_skipped);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
