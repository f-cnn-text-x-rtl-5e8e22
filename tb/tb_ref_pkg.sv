// tb_ref_pkg: reference model and test-data generator for the testbenches.
//
// Memory contents are a fixed function of the word address, so any testbench
// can compute what an engine will read.  The reference engine computes the
// convolution, ReLU and pooling directly from the definition (full-precision
// sum of Q8.8 products, shift right by 8 with floor, saturate to 16 bits,
// max(0, x), max or truncating average over the pooling window), with loops
// over output positions rather than over the stream the hardware sees.
package tb_ref_pkg;
  import fcnnx_pkg::*;

  // Q8.8 element of lane l of the word at address a: values in [-2, 2).
  function automatic elem_t gen_elem(logic [ADDR_W-1:0] a, int l);
    logic [31:0] h;
    h = a * 32'h9E37_79B1 + 32'(l) * 32'h85EB_CA6B + 32'h1234_5678;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B_3C6D;
    h = h ^ (h >> 12);
    return elem_t'($signed({{7{h[8]}}, h[8:0]}));
  endfunction

  function automatic word_t gen_word(logic [ADDR_W-1:0] a);
    word_t w;
    for (int l = 0; l < PACK; l++) w[l*DATA_W +: DATA_W] = gen_elem(a, l);
    return w;
  endfunction

  function automatic elem_t sat(longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return elem_t'(v);
  endfunction

  // Conv (KxK, stride 1) of x[h][w][ci] with wt[o][ky][kx][ci], flattened.
  function automatic void ref_conv(input engine_cfg_t c, input elem_t wt[$], input elem_t x[$],
                                   output elem_t y[$]);
    int ho, wo, IC, OC, K, Wd;
    IC = int'(c.in_ch); OC = int'(c.out_ch); K = int'(c.k); Wd = int'(c.w);
    ho = int'(c.h) - K + 1; wo = Wd - K + 1;
    y = {};
    for (int r = 0; r < ho; r++)
      for (int q = 0; q < wo; q++)
        for (int o = 0; o < OC; o++) begin
          longint s;
          s = 0;
          for (int ky = 0; ky < K; ky++)
            for (int kx = 0; kx < K; kx++)
              for (int ci = 0; ci < IC; ci++)
                s += longint'(x[((r + ky) * Wd + (q + kx)) * IC + ci]) *
                     longint'(wt[((o * K + ky) * K + kx) * IC + ci]);
          y.push_back(sat(s >>> 8));
        end
  endfunction

  function automatic void ref_pool(input int C, input int H, input int W, input int P,
                                   input bit avg, input elem_t x[$], output elem_t y[$]);
    y = {};
    for (int r = 0; r < H / P; r++)
      for (int q = 0; q < W / P; q++)
        for (int ch = 0; ch < C; ch++) begin
          longint m, s;
          m = -100000; s = 0;
          for (int dy = 0; dy < P; dy++)
            for (int dx = 0; dx < P; dx++) begin
              longint v;
              v = x[((r * P + dy) * W + (q * P + dx)) * C + ch];
              s += v;
              if (v > m) m = v;
            end
          y.push_back(avg ? elem_t'(s / (P * P)) : elem_t'(m));
        end
  endfunction

  // Whole engine on one subgraph: stream = weights then input map.
  // One conv -> ReLU -> optional pooling block.
  function automatic void ref_block(input engine_cfg_t c, input elem_t wt[$], input elem_t x[$],
                                    output elem_t y[$]);
    elem_t cv[$];
    ref_conv(c, wt, x, cv);
    foreach (cv[i]) if (cv[i] < 0) cv[i] = 0;
    if (c.pool != 0)
      ref_pool(int'(c.out_ch), int'(c.h) - int'(c.k) + 1, int'(c.w) - int'(c.k) + 1,
               int'(c.pool), c.pool_avg, cv, y);
    else y = cv;
  endfunction

  // Whole engine on one subgraph: stream = first-block weights, second-block
  // weights (if any), then the input map.
  function automatic void ref_engine(input engine_cfg_t c, input elem_t stream[$],
                                     output elem_t y[$]);
    elem_t wt[$], wt2[$], x[$], y1[$];
    int nw1, nw2;
    nw1 = int'(conv_weights(c));
    nw2 = int'(weight_elems(c)) - nw1;
    for (int i = 0; i < nw1; i++) wt.push_back(stream[i]);
    for (int i = 0; i < nw2; i++) wt2.push_back(stream[nw1 + i]);
    for (int i = 0; i < int'(input_elems(c)); i++) x.push_back(stream[nw1 + nw2 + i]);
    ref_block(c, wt, x, y1);
    if (c.k2 != 0) ref_block(second_block(c), wt2, y1, y);
    else y = y1;
  endfunction

  // Element stream of a region of memory words.
  function automatic void region_elems(input logic [ADDR_W-1:0] base, input int words,
                                       output elem_t s[$]);
    s = {};
    for (int a = 0; a < words; a++)
      for (int l = 0; l < PACK; l++) s.push_back(gen_elem(base + ADDR_W'(a), l));
  endfunction
endpackage
