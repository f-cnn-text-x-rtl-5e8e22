// mcnn_cu: control unit of the multi-CNN hardware scheduler (MCNN-HS).
//
// The control unit runs the static memory schedule.  Time on the read port is
// cut into slots of one burst (burst_len words, one word per cycle), and the
// engines are served round-robin: engine e holds `slots` consecutive slots
// (from the configuration table entry of its current subgraph), then the next
// engine gets the port.  Over a period the fraction of bandwidth engine e gets
// is slots(e) / sum(slots); this is how the schedule's per-subgraph slow-downs
// are realised.  For each slot the unit hands the read controller an address
// and a transfer size (one burst, or the subgraph's remainder if smaller).
//
// The subgraphs register holds each engine's current subgraph.  When all input
// words of a subgraph have been read and all its output words written, the
// engine's entry advances to the next subgraph (wrapping to subgraph 0 after the
// last, as the cyclic schedule repeats), and the new entry is fetched from the
// configuration table.  Subgraph j+1 of an engine therefore never starts before
// subgraph j has finished, which is the schedule's precedence rule.
//
// Choices of this design where the paper gives no detail:
//  * Admission: a slot is used only if the engine's input FIFO has room for the
//    whole burst (per-engine credits, returned as the engine pops words).  An
//    engine that has nothing to read, or no room, gives up the rest of its
//    slots in this period ("skipped slot"); the port never idles on a slot that
//    cannot be used, and a burst can never block in the staging buffer.
//  * Writes: the write port is served round-robin as well, one burst at a
//    time, to an engine whose output FIFO already holds a whole burst (or the
//    subgraph's remaining output).  Those words are moved into the write
//    staging buffer (copy) while the write controller sends them.
//  * Sizes are in memory words, addresses are word addresses.
module mcnn_cu
  import fcnnx_pkg::*;
#(
  parameter int unsigned N_ENG      = 4,
  parameter int unsigned FIFO_DEPTH = 1024,
  parameter int unsigned EW         = (N_ENG > 1) ? $clog2(N_ENG) : 1,
  parameter int unsigned CW         = $clog2(FIFO_DEPTH + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  logic [LEN_W-1:0]  burst_len,
  // configuration table
  output logic              tbl_lookup,
  output logic [$clog2(MAX_ENG)-1:0] tbl_eng,
  output logic [$clog2(MAX_SG)-1:0]  tbl_sg,
  input  logic              tbl_valid,
  input  cfg_entry_t        tbl_entry,
  // read memory controller
  output logic              rd_cmd_valid,
  input  logic              rd_cmd_ready,
  output logic [ADDR_W-1:0] rd_cmd_addr,
  output logic [LEN_W-1:0]  rd_cmd_size,
  output logic [EW-1:0]     rd_cmd_eng,
  input  logic              rd_done,
  input  logic [N_ENG-1:0]  rfifo_pop,      // an engine took a word from its input FIFO
  // write memory controller and write-side copy
  output logic              wr_cmd_valid,
  input  logic              wr_cmd_ready,
  output logic [ADDR_W-1:0] wr_cmd_addr,
  output logic [LEN_W-1:0]  wr_cmd_size,
  input  logic              wr_done,
  input  logic [CW-1:0]     wfifo_count [N_ENG],
  output logic              wcopy_en,       // move words from wfifo[wsel] to the staging buffer
  output logic [EW-1:0]     wsel,
  input  logic              wcopy_fire,     // one word moved
  // status
  output logic [$clog2(MAX_SG)-1:0] sg_reg [N_ENG],  // subgraphs register
  output logic [31:0]       slots_used [N_ENG],
  output logic [31:0]       slots_skipped,
  output logic [31:0]       sg_done [N_ENG],
  output logic [31:0]       inferences [N_ENG]
);
  // per-engine state loaded from the table
  logic              loaded [N_ENG];
  logic              unused [N_ENG];
  logic [ADDR_W-1:0] rd_addr [N_ENG], wr_addr [N_ENG];
  logic [LEN_W-1:0]  rd_rem [N_ENG], wr_rem [N_ENG];
  logic [SLOT_W-1:0] slots [N_ENG];
  logic [CW:0]       credit [N_ENG];

  // ---------------- table loader
  typedef enum logic [1:0] {L_SCAN, L_WAIT} lstate_e;
  lstate_e lstate;
  logic [EW-1:0] lptr;

  // ---------------- read scheduler
  typedef enum logic [1:0] {R_PICK, R_CMD, R_WAIT} rstate_e;
  rstate_e rstate;
  logic [EW-1:0]     rr;          // engine holding the read port
  logic [SLOT_W-1:0] slot_left;   // slots it still has in this period
  logic              first_slot;  // rr just got the port
  logic [LEN_W-1:0]  rlen;

  // ---------------- write scheduler
  typedef enum logic [1:0] {W_PICK, W_CMD, W_WAIT} wstate_e;
  wstate_e wstate;
  logic [EW-1:0]    wr;
  logic [LEN_W-1:0] wlen, copy_left;
  logic             wdone_seen;

  function automatic logic [LEN_W-1:0] min_len(logic [LEN_W-1:0] a, logic [LEN_W-1:0] b);
    return (a < b) ? a : b;
  endfunction

  function automatic logic [EW-1:0] next_eng(logic [EW-1:0] e);
    return (int'(e) == N_ENG - 1) ? '0 : e + 1'b1;
  endfunction

  assign tbl_lookup = (lstate == L_SCAN) && !loaded[lptr] && !unused[lptr];
  assign tbl_eng    = ($bits(tbl_eng))'(lptr);
  assign tbl_sg     = sg_reg[lptr];

  assign rd_cmd_valid = (rstate == R_CMD);
  assign rd_cmd_addr  = rd_addr[rr];
  assign rd_cmd_size  = rlen;
  assign rd_cmd_eng   = rr;

  assign wr_cmd_valid = (wstate == W_CMD);
  assign wr_cmd_addr  = wr_addr[wr];
  assign wr_cmd_size  = wlen;
  assign wsel         = wr;
  assign wcopy_en     = (wstate != W_PICK) && (copy_left != '0);

  // an engine's subgraph is complete when nothing is left and nothing in flight
  logic complete [N_ENG];
  always_comb
    for (int e = 0; e < N_ENG; e++)
      complete[e] = loaded[e] && rd_rem[e] == '0 && wr_rem[e] == '0 &&
                    !(rstate != R_PICK && int'(rr) == e) &&
                    !(wstate != W_PICK && int'(wr) == e);

  logic [LEN_W-1:0] want;   // burst the current read owner would take
  assign want = min_len(burst_len, rd_rem[rr]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lstate <= L_SCAN; lptr <= '0;
      rstate <= R_PICK; rr <= '0; slot_left <= '0; first_slot <= 1'b1; rlen <= '0;
      wstate <= W_PICK; wr <= '0; wlen <= '0; copy_left <= '0; wdone_seen <= 1'b0;
      slots_skipped <= '0;
      for (int e = 0; e < N_ENG; e++) begin
        loaded[e] <= 1'b0; unused[e] <= 1'b0; sg_reg[e] <= '0;
        rd_addr[e] <= '0; wr_addr[e] <= '0; rd_rem[e] <= '0; wr_rem[e] <= '0;
        slots[e] <= '0; credit[e] <= (CW+1)'(FIFO_DEPTH);
        slots_used[e] <= '0; sg_done[e] <= '0; inferences[e] <= '0;
      end
    end else begin
      // ---- credits: returned as engines pop their input FIFOs
      for (int e = 0; e < N_ENG; e++)
        if (rfifo_pop[e]) credit[e] <= credit[e] + 1'b1;

      // ---- subgraph completion: advance the subgraphs register
      for (int e = 0; e < N_ENG; e++)
        if (complete[e]) begin
          loaded[e]  <= 1'b0;
          sg_done[e] <= sg_done[e] + 1;
          sg_reg[e]  <= sg_reg[e] + 1'b1;
        end

      // ---- table loader
      case (lstate)
        L_SCAN: if (tbl_lookup) lstate <= L_WAIT;
                else lptr <= next_eng(lptr);
        L_WAIT: if (tbl_valid) begin
          lstate <= L_SCAN;
          if (tbl_entry.rd_words == '0) begin
            // end of this engine's list: wrap to subgraph 0
            if (sg_reg[lptr] == '0) unused[lptr] <= 1'b1;
            else begin
              sg_reg[lptr] <= '0;
              inferences[lptr] <= inferences[lptr] + 1;
            end
          end else begin
            loaded[lptr]  <= 1'b1;
            rd_addr[lptr] <= tbl_entry.rd_base;
            rd_rem[lptr]  <= tbl_entry.rd_words;
            wr_addr[lptr] <= tbl_entry.wr_base;
            wr_rem[lptr]  <= tbl_entry.wr_words;
            slots[lptr]   <= tbl_entry.slots;
            lptr <= next_eng(lptr);
          end
        end
        default: lstate <= L_SCAN;
      endcase

      // ---- read scheduler: round-robin over slots
      case (rstate)
        R_PICK: if (run) begin
          if (loaded[rr] && rd_rem[rr] != '0 && credit[rr] >= (CW+1)'(want) &&
              (first_slot || slot_left != '0)) begin
            rlen   <= want;
            rstate <= R_CMD;
            if (first_slot) slot_left <= slots[rr];
            first_slot <= 1'b0;
          end else begin
            // the owner cannot use its remaining slots: pass the port on
            if (loaded[rr] && rd_rem[rr] != '0)
              slots_skipped <= slots_skipped + 1;
            rr <= next_eng(rr);
            first_slot <= 1'b1;
          end
        end
        R_CMD: if (rd_cmd_ready) begin
          rstate <= R_WAIT;
          credit[rr]  <= credit[rr] - (CW+1)'(rlen) + (rfifo_pop[rr] ? 1'b1 : 1'b0);
          rd_addr[rr] <= rd_addr[rr] + ADDR_W'(rlen);
          rd_rem[rr]  <= rd_rem[rr] - rlen;
          slots_used[rr] <= slots_used[rr] + 1;
        end
        R_WAIT: if (rd_done) begin
          rstate <= R_PICK;
          if (slot_left <= 1) begin
            slot_left <= '0;
            rr <= next_eng(rr);
            first_slot <= 1'b1;
          end else slot_left <= slot_left - 1'b1;
        end
        default: rstate <= R_PICK;
      endcase

      // ---- write scheduler
      case (wstate)
        W_PICK: begin
          if (run && loaded[wr] && wr_rem[wr] != '0 &&
              wfifo_count[wr] >= CW'(min_len(burst_len, wr_rem[wr]))) begin
            wlen      <= min_len(burst_len, wr_rem[wr]);
            copy_left <= min_len(burst_len, wr_rem[wr]);
            wdone_seen <= 1'b0;
            wstate    <= W_CMD;
          end else wr <= next_eng(wr);
        end
        W_CMD: begin
          if (wcopy_fire) copy_left <= copy_left - 1'b1;
          if (wr_cmd_ready) begin
            wstate <= W_WAIT;
            wr_addr[wr] <= wr_addr[wr] + ADDR_W'(wlen);
            wr_rem[wr]  <= wr_rem[wr] - wlen;
          end
        end
        W_WAIT: begin
          if (wcopy_fire) copy_left <= copy_left - 1'b1;
          if (wr_done) wdone_seen <= 1'b1;
          if ((wr_done || wdone_seen) && (copy_left == '0 || (copy_left == 1 && wcopy_fire))) begin
            wstate <= W_PICK;
            wr <= next_eng(wr);
          end
        end
        default: wstate <= W_PICK;
      endcase
    end
  end

  a_credit: assert property (@(posedge clk) disable iff (!rst_n)
    rd_cmd_valid |-> credit[rr] >= (CW+1)'(rd_cmd_size));
endmodule
