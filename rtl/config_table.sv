// config_table: compile-time configuration table of the memory scheduler.
//
// One entry per (engine, subgraph) holds what the schedule needs at run time:
// the off-chip base addresses and sizes (in memory words) of the subgraph's
// input and output transfers, and the number of consecutive slots the engine
// holds in each round-robin period while it runs that subgraph.  The contents
// are fixed when the design is built (parameter TABLE), as the paper's
// rate-controlling mechanism produces them.  A lookup returns the entry one
// cycle after `lookup` (registered, as a ROM in block RAM would).  An entry
// whose rd_words is zero marks the end of an engine's list of subgraphs.
module config_table
  import fcnnx_pkg::*;
#(
  parameter cfg_table_t TABLE = build_cfg_table(DEFAULT_ENGINES, MAX_ENG)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       lookup,
  input  logic [$clog2(MAX_ENG)-1:0] eng,
  input  logic [$clog2(MAX_SG)-1:0]  sg,
  output logic                       entry_valid,
  output cfg_entry_t                 entry
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      entry_valid <= 1'b0;
      entry       <= '0;
    end else begin
      entry_valid <= lookup;
      if (lookup) entry <= TABLE[eng][sg];
    end
  end
endmodule
