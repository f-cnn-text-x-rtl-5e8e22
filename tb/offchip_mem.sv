// offchip_mem: behavioural model of the external memory for the testbenches.
//
// It answers the simplified AXI-style read and write channels of the
// accelerator.  Reads return the word written last to an address, or, for an
// address never written, tb_ref_pkg::gen_word(address).  A read burst starts
// LAT cycles after its address is accepted.  With STALL set, ar_ready,
// aw_ready, r_valid gaps and w_ready drop at random to exercise back-pressure.
// Every written word is kept in `mem` and counted.
module offchip_mem
  import fcnnx_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int unsigned LAT   = 8,
  parameter bit          STALL = 1'b0
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              ar_valid,
  output logic              ar_ready,
  input  logic [ADDR_W-1:0] ar_addr,
  input  logic [LEN_W-1:0]  ar_len,
  output logic              r_valid,
  input  logic              r_ready,
  output word_t             r_data,
  output logic              r_last,
  input  logic              aw_valid,
  output logic              aw_ready,
  input  logic [ADDR_W-1:0] aw_addr,
  input  logic [LEN_W-1:0]  aw_len,
  input  logic              w_valid,
  output logic              w_ready,
  input  word_t             w_data,
  input  logic              w_last,
  output logic              b_valid,
  input  logic              b_ready
);
  word_t mem [logic [ADDR_W-1:0]];
  int unsigned words_written, words_read, bursts_read, bursts_written;
  int unsigned w_last_errors;

  typedef enum {RI, RL, RD} rs_e;
  rs_e rs;
  logic [ADDR_W-1:0] raddr;
  int rleft, rwait;
  logic rgap;

  function automatic word_t rd(logic [ADDR_W-1:0] a);
    if (mem.exists(a)) return mem[a];
    return gen_word(a);
  endfunction

  assign ar_ready = (rs == RI) && (!STALL || rgap);
  assign r_valid  = (rs == RD) && (!STALL || rgap);
  assign r_data   = rd(raddr);
  assign r_last   = (rleft == 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rs <= RI; raddr <= '0; rleft <= 0; rwait <= 0; rgap <= 1'b1;
      words_read <= 0; bursts_read <= 0;
    end else begin
      rgap <= ($urandom % 4) != 0;
      case (rs)
        RI: if (ar_valid && ar_ready) begin
          raddr <= ar_addr; rleft <= int'(ar_len); rwait <= LAT; rs <= RL;
          bursts_read <= bursts_read + 1;
        end
        RL: if (rwait <= 1) rs <= RD; else rwait <= rwait - 1;
        RD: if (r_valid && r_ready) begin
          raddr <= raddr + 1; rleft <= rleft - 1; words_read <= words_read + 1;
          if (rleft == 1) rs <= RI;
        end
        default: rs <= RI;
      endcase
    end
  end

  typedef enum {WI, WD, WB} ws_e;
  ws_e ws;
  logic [ADDR_W-1:0] waddr;
  int wleft;
  logic wgap;
  assign aw_ready = (ws == WI) && (!STALL || wgap);
  assign w_ready  = (ws == WD) && (!STALL || wgap);
  assign b_valid  = (ws == WB);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ws <= WI; waddr <= '0; wleft <= 0; wgap <= 1'b1;
      words_written <= 0; bursts_written <= 0; w_last_errors <= 0;
    end else begin
      wgap <= ($urandom % 3) != 0;
      case (ws)
        WI: if (aw_valid && aw_ready) begin
          waddr <= aw_addr; wleft <= int'(aw_len); ws <= WD;
          bursts_written <= bursts_written + 1;
        end
        WD: if (w_valid && w_ready) begin
          mem[waddr] = w_data;
          waddr <= waddr + 1; wleft <= wleft - 1; words_written <= words_written + 1;
          if (w_last != (wleft == 1)) w_last_errors <= w_last_errors + 1;
          if (wleft == 1) ws <= WB;
        end
        WB: if (b_ready) ws <= WI;
        default: ws <= WI;
      endcase
    end
  end
endmodule
