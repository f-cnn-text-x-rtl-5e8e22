// tb_config_table: self-checking test of the configuration table.
//
// Looks up every (engine, subgraph) pair of the default four-engine table and
// compares the registered result, one cycle after the lookup, with values
// worked out by hand from the default engine shapes: read sizes 121, 82, 41 and
// 108 words, write sizes 1, 4, 16 and 8 words, slots 1, 2, 4 and 1, one 64K-word
// region per subgraph, and empty entries past each engine's last subgraph.
module tb_config_table;
  import fcnnx_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic lookup, entry_valid;
  logic [$clog2(MAX_ENG)-1:0] eng;
  logic [$clog2(MAX_SG)-1:0] sg;
  cfg_entry_t entry;

  config_table dut (.*);

  localparam int RD [4] = '{121, 82, 41, 108};
  localparam int WR [4] = '{1, 4, 16, 8};
  localparam int SL [4] = '{1, 2, 4, 1};
  localparam int NS [4] = '{2, 3, 6, 2};

  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    lookup = 0; eng = '0; sg = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int e = 0; e < MAX_ENG; e++)
      for (int j = 0; j < MAX_SG; j++) begin
        automatic cfg_entry_t x = '0;
        if (j < NS[e]) begin
          x.rd_base = ADDR_W'((e * 8 + j) * 32'h10000);
          x.wr_base = ADDR_W'(32'h0100_0000 + (e * 8 + j) * 32'h10000);
          x.rd_words = LEN_W'(RD[e]); x.wr_words = LEN_W'(WR[e]); x.slots = SLOT_W'(SL[e]);
        end
        @(negedge clk); lookup = 1; eng = 2'(e); sg = 3'(j);
        @(negedge clk); lookup = 0; eng = '0; sg = '0;
        checks++;
        if (!entry_valid || entry !== x) begin
          failures++; $display("FAIL: entry %0d/%0d", e, j);
        end
        @(negedge clk);
        checks++;
        if (entry_valid) begin failures++; $display("FAIL: valid held"); end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
