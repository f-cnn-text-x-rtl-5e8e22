// tb_conv_pe: self-checking test of the C-PE (dot-product unit + weights memory).
//
// A PE with N_OP = 3 multipliers and 6 weight rows is loaded with random
// weights.  Random dot products of 1 to 6 chunks (rows) are then fed, one chunk
// per cycle, with random gaps.  Each result must equal the full-precision sum
// of products shifted right by 8 and saturated, and must appear exactly two
// clock edges after the edge that takes its last chunk.  Large values are included to hit saturation.
module tb_conv_pe;
  import fcnnx_pkg::*;
  localparam int N_OP = 3, DEPTH = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, sats = 0;

  logic w_we, in_valid, first, last, res_valid;
  logic [$clog2(DEPTH+1)-1:0] w_wr_addr, w_rd_addr;
  logic [$clog2(N_OP+1)-1:0] w_lane;
  elem_t w_data, res;
  elem_t x [N_OP];

  conv_pe #(.N_OP(N_OP), .DEPTH(DEPTH)) dut (.*);

  elem_t wts [DEPTH][N_OP];
  longint cyc = 0;
  always_ff @(posedge clk) cyc <= cyc + 1;

  typedef struct { elem_t v; longint at; } exp_t;
  exp_t q[$];
  longint last_at;

  always_ff @(posedge clk) if (rst_n) begin
    if (res_valid) begin
      checks++;
      if (q.size() == 0 || res != q[0].v || cyc != q[0].at) begin
        failures++;
        $display("FAIL: res %0d at %0d, expected %0d at %0d", res, cyc, q[0].v, q[0].at);
      end
      if (q.size() > 0) void'(q.pop_front());
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    w_we = 0; in_valid = 0; first = 0; last = 0; w_wr_addr = 0; w_rd_addr = 0; w_lane = 0; w_data = 0;
    foreach (x[i]) x[i] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < DEPTH; r++)
      for (int l = 0; l < N_OP; l++) begin
        wts[r][l] = (r == DEPTH - 1) ? elem_t'(16'sh7f00) : elem_t'($signed(10'($urandom)));
        w_we = 1; w_wr_addr = 3'(r); w_lane = 2'(l); w_data = wts[r][l];
        @(negedge clk);
      end
    w_we = 0;
    for (int n = 0; n < 300; n++) begin
      int len, start;
      longint s;
      len = 1 + $urandom % DEPTH;
      start = $urandom % (DEPTH - len + 1);
      s = 0;
      for (int k = 0; k < len; k++) begin
        in_valid = 1; first = (k == 0); last = (k == len - 1); w_rd_addr = 3'(start + k);
        last_at = cyc;
        for (int l = 0; l < N_OP; l++) begin
          x[l] = (n % 7 == 0) ? elem_t'(16'sh7fff) : elem_t'($signed(12'($urandom)));
          s += longint'(x[l]) * longint'(wts[start + k][l]);
        end
        @(negedge clk);
        in_valid = 0;
        if ($urandom % 3 == 0) @(negedge clk);
      end
      begin
        exp_t e;
        longint v;
        v = s >>> 8;
        if (v > 32767) begin v = 32767; sats++; end
        if (v < -32768) begin v = -32768; sats++; end
        e.v = elem_t'(v);
        e.at = last_at + 2;
        q.push_back(e);
      end
    end
    repeat (5) @(negedge clk);
    checks++;
    if (q.size() != 0 || sats == 0) begin failures++; $display("FAIL: %0d results missing, %0d sats", q.size(), sats); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
