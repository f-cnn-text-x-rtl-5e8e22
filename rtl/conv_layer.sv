// conv_layer: streaming convolution stage (KxK, stride 1, no padding).
//
// Each subgraph the stage first takes its weights and then one input feature
// map from the same element stream:
//   * OUT_CH*K*K*IN_CH weights, ordered output map, kernel row, kernel column,
//     input channel (last index fastest);
//   * H*W*IN_CH input elements, ordered row, column, channel (channel fastest).
// Output map o is computed by C-PE (o mod N_PE) in fold (o / N_PE): the
// output feature maps are folded over N_PE C-PEs, which are time-shared.
// Input rows pass through a line buffer of K rows.  When the last channel of
// pixel (r, c) arrives and a whole KxK window ends there, the input stalls and
// the stage walks the window: for each of OUT_CH/N_PE folds it feeds
// ceil(K*K*IN_CH/N_OP) chunks of N_OP taps to all C-PEs in parallel (the input
// maps are thus processed in a pipelined manner, one chunk per cycle).  The
// N_PE results of a fold are then emitted one per cycle in output-map order, so
// the output stream is the (H-K+1) x (W-K+1) x OUT_CH map, channel fastest.
// After the last pixel the stage returns to weight loading for the next
// subgraph.
//
// Output-map folding over C-PEs and the N_OP-wide dot product follow the
// paper.  Streaming orders, the line buffer, the weights-first stream and the
// wait for the previous fold's results to leave before a new fold starts are
// this design's choices.  Input-map folding (f_in) is not built: every layer
// here keeps all its weights on chip.
module conv_layer
  import fcnnx_pkg::*;
#(
  parameter int unsigned IN_CH  = 2,
  parameter int unsigned OUT_CH = 4,
  parameter int unsigned H      = 8,
  parameter int unsigned W      = 8,
  parameter int unsigned K      = 5,
  parameter int unsigned N_PE   = 4,
  parameter int unsigned N_OP   = 5
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  elem_t in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output elem_t out_data,
  output logic  busy_compute      // high while the input is stalled for a window
);
  localparam int unsigned T     = K * K * IN_CH;          // taps per window
  localparam int unsigned NCH   = (T + N_OP - 1) / N_OP;  // chunks per window
  localparam int unsigned G     = OUT_CH / N_PE;          // folds
  localparam int unsigned DEPTH = G * NCH;                // weight rows per PE
  localparam int unsigned RAW   = $clog2(DEPTH + 1);

  typedef enum logic [1:0] {S_LOAD, S_FEAT, S_COMP} state_e;
  state_e state;

  // ---------------- weights load counters
  logic [$clog2(OUT_CH+1)-1:0] lo;     // output map
  logic [$clog2(T+1)-1:0]      lt;     // tap
  logic [$clog2(NCH+1)-1:0]    lchunk;
  logic [$clog2(N_OP+1)-1:0]   llane;

  // ---------------- feature counters and line buffer
  elem_t lb [K][W][IN_CH];
  logic [$clog2(H+1)-1:0]     r;
  logic [$clog2(W+1)-1:0]     c;
  logic [$clog2(IN_CH+1)-1:0] ci;
  logic [$clog2(K+1)-1:0]     rs;      // r mod K

  // ---------------- compute counters
  logic [$clog2(G+1)-1:0]   g;
  logic [$clog2(NCH+1)-1:0] chunk;
  logic                     issuing;   // a fold is being issued
  logic                     frame_end; // current window is the frame's last

  // ---------------- serializer
  elem_t res_buf [N_PE];
  logic [$clog2(N_PE+1)-1:0] ser_cnt, ser_idx;
  logic [2:0] inflight;                // folds issued whose results are pending

  logic take;
  assign in_ready = (state == S_LOAD) || (state == S_FEAT);
  assign take     = in_valid && in_ready;
  assign busy_compute = (state == S_COMP);

  // PE interface
  logic pe_we [N_PE];
  logic [RAW-1:0] pe_rd_addr, pe_wr_addr;
  elem_t pe_x [N_OP];
  logic pe_valid, pe_first, pe_last;
  logic pe_res_valid [N_PE];
  elem_t pe_res [N_PE];

  assign pe_wr_addr = RAW'(int'(lo) / N_PE * NCH + int'(lchunk));
  always_comb
    for (int p = 0; p < N_PE; p++)
      pe_we[p] = take && (state == S_LOAD) && (int'(lo) % N_PE == p);

  assign pe_valid   = (state == S_COMP) && issuing;
  assign pe_first   = (chunk == '0);
  assign pe_last    = (int'(chunk) == NCH - 1);
  assign pe_rd_addr = RAW'(int'(g) * NCH + int'(chunk));

  // window gather: tap t = (ky*K + kx)*IN_CH + ci
  int t, ky, kx, cc, slot, col;   // gather indices, combinational temporaries
  always_comb begin
    for (int l = 0; l < N_OP; l++) begin
      t  = int'(chunk) * N_OP + l;
      cc = t % IN_CH;
      kx = (t / IN_CH) % K;
      ky = t / (IN_CH * K);
      slot = (int'(rs) + 1 + ky) % K;
      col  = int'(c) - (K - 1) + kx;
      if (t < T && col >= 0) pe_x[l] = lb[slot][col][cc];
      else                   pe_x[l] = '0;
    end
  end

  for (genvar p = 0; p < N_PE; p++) begin : g_pe
    conv_pe #(.N_OP(N_OP), .DEPTH(DEPTH)) u_pe (
      .clk, .rst_n,
      .w_we(pe_we[p]), .w_wr_addr(pe_wr_addr), .w_lane(llane), .w_data(in_data),
      .in_valid(pe_valid), .w_rd_addr(pe_rd_addr), .x(pe_x),
      .first(pe_first), .last(pe_last),
      .res_valid(pe_res_valid[p]), .res(pe_res[p])
    );
  end

  always_ff @(posedge clk) begin
    if (take && state == S_FEAT) lb[rs][c][ci] <= in_data;
  end

  assign out_valid = (ser_cnt != '0);
  assign out_data  = res_buf[ser_idx];

  logic window_ready, last_pixel;
  assign last_pixel   = (int'(r) == H - 1) && (int'(c) == W - 1) && (int'(ci) == IN_CH - 1);
  assign window_ready = (int'(ci) == IN_CH - 1) && (int'(r) >= K - 1) && (int'(c) >= K - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_LOAD;
      lo <= '0; lt <= '0; lchunk <= '0; llane <= '0;
      r <= '0; c <= '0; ci <= '0; rs <= '0;
      g <= '0; chunk <= '0; issuing <= 1'b0; frame_end <= 1'b0;
      ser_cnt <= '0; ser_idx <= '0; inflight <= '0;
      for (int p = 0; p < N_PE; p++) res_buf[p] <= '0;
    end else begin
      // serializer
      if (out_valid && out_ready) begin
        ser_idx <= ser_idx + 1'b1;
        ser_cnt <= ser_cnt - 1'b1;
      end
      if (pe_res_valid[0]) begin
        for (int p = 0; p < N_PE; p++) res_buf[p] <= pe_res[p];
        ser_cnt <= ($bits(ser_cnt))'(N_PE);
        ser_idx <= '0;
      end
      inflight <= inflight + ((pe_valid && pe_last) ? 3'd1 : 3'd0)
                           - (pe_res_valid[0] ? 3'd1 : 3'd0);

      case (state)
        S_LOAD: if (take) begin
          if (int'(llane) == N_OP - 1 || int'(lt) == T - 1) begin
            llane <= '0; lchunk <= lchunk + 1'b1;
          end else llane <= llane + 1'b1;
          if (int'(lt) == T - 1) begin
            lt <= '0; lchunk <= '0;
            if (int'(lo) == OUT_CH - 1) begin
              lo <= '0; state <= S_FEAT;
            end else lo <= lo + 1'b1;
          end else lt <= lt + 1'b1;
        end
        S_FEAT: if (take) begin
          if (window_ready) begin
            state <= S_COMP; g <= '0; chunk <= '0; issuing <= 1'b0;
            frame_end <= last_pixel;
          end else begin
            // advance counters now; for a window they advance after compute
            if (int'(ci) == IN_CH - 1) begin
              ci <= '0;
              if (int'(c) == W - 1) begin
                c <= '0; r <= r + 1'b1;
                rs <= (int'(rs) == K - 1) ? '0 : rs + 1'b1;
              end else c <= c + 1'b1;
            end else ci <= ci + 1'b1;
          end
        end
        S_COMP: begin
          if (!issuing) begin
            // start a fold once the previous fold's results have left
            if (ser_cnt == '0 && inflight == '0 && !pe_res_valid[0]) issuing <= 1'b1;
          end else if (pe_last) begin
            issuing <= 1'b0;
            chunk   <= '0;
            if (int'(g) == G - 1) begin
              // window finished: advance the pixel counters
              g <= '0;
              ci <= '0;
              if (frame_end) begin
                r <= '0; c <= '0; rs <= '0; state <= S_LOAD;
              end else begin
                state <= S_FEAT;
                if (int'(c) == W - 1) begin
                  c <= '0; r <= r + 1'b1;
                  rs <= (int'(rs) == K - 1) ? '0 : rs + 1'b1;
                end else c <= c + 1'b1;
              end
            end else g <= g + 1'b1;
          end else begin
            chunk <= chunk + 1'b1;
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end
endmodule
