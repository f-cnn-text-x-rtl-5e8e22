// fcnnx_pkg: types, constants and compile-time helper functions shared by the
// multi-CNN accelerator.
//
// Numbers that follow the paper: 16-bit Q8.8 fixed point data, a 64-bit memory
// port carrying four packed elements per word, a fixed burst length (= slot
// length) of 1024 words, and four CNN engines.  Everything else here is this
// implementation's own choice: word addressing, the layout of each subgraph's
// data in memory (weights first, then the input feature map, channel fastest),
// and the small default layer shapes of the four engines, whose kernel sizes
// (7x7, 5x5, 5x5) follow the three example subgraphs of the slow-down figure.
package fcnnx_pkg;

  localparam int unsigned DATA_W    = 16;   // Q8.8
  localparam int unsigned FRAC_W    = 8;
  localparam int unsigned MEM_W     = 64;   // memory port width
  localparam int unsigned PACK      = MEM_W / DATA_W;  // elements per word
  localparam int unsigned ADDR_W    = 32;   // word address
  localparam int unsigned LEN_W     = 16;   // transfer sizes in words
  localparam int unsigned ENG_W     = 4;    // engine index width
  localparam int unsigned SG_W      = 4;    // subgraph index width
  localparam int unsigned SLOT_W    = 8;    // consecutive slots per subgraph
  localparam int unsigned MAX_ENG   = 4;
  localparam int unsigned MAX_SG    = 8;    // subgraphs per engine, max
  localparam int unsigned ACC_W     = 48;   // accumulator width inside C-PEs

  typedef logic signed [DATA_W-1:0] elem_t;
  typedef logic [MEM_W-1:0]         word_t;


  // One engine: conv KxK (stride 1, no padding) -> ReLU -> optional PxP pooling,
  // optionally followed by a second such block (k2 != 0) on the first one's output.
  typedef struct packed {
    logic [7:0] in_ch;
    logic [7:0] out_ch;
    logic [7:0] h;
    logic [7:0] w;
    logic [7:0] k;
    logic [7:0] n_pe;     // C-PEs, divides out_ch
    logic [7:0] n_op;     // multipliers per C-PE, in [1, k*k*in_ch]
    logic [7:0] pool;     // 0 = no pooling stage, else pool size (stride = size)
    logic       pool_avg; // 1 = average pooling
    logic [7:0] n_sg;     // subgraphs executed cyclically
    logic [7:0] slots;    // consecutive slots per round-robin period
    logic [7:0] k2;       // second block: kernel size, 0 = no second block
    logic [7:0] out_ch2;
    logic [7:0] n_pe2;
    logic [7:0] n_op2;
    logic [7:0] pool2;
    logic       pool2_avg;
  } engine_cfg_t;

  // One configuration-table entry (one subgraph of one engine).
  typedef struct packed {
    logic [ADDR_W-1:0] rd_base;
    logic [LEN_W-1:0]  rd_words;
    logic [ADDR_W-1:0] wr_base;
    logic [LEN_W-1:0]  wr_words;
    logic [SLOT_W-1:0] slots;
  } cfg_entry_t;

  typedef cfg_entry_t [0:MAX_ENG-1][0:MAX_SG-1] cfg_table_t;
  typedef engine_cfg_t [0:MAX_ENG-1] engine_cfg_arr_t;

  // Default engines.  slots = 1, 2, 4 follows the paper's MCNN-HS example;
  // the fourth engine's slot count is assumed.
  localparam engine_cfg_arr_t DEFAULT_ENGINES = '{
    '{in_ch:8'd1, out_ch:8'd4, h:8'd12, w:8'd12, k:8'd7, n_pe:8'd2, n_op:8'd7,
      pool:8'd2, pool_avg:1'b0, n_sg:8'd2, slots:8'd1,
      k2:8'd3, out_ch2:8'd4, n_pe2:8'd2, n_op2:8'd6, pool2:8'd0, pool2_avg:1'b0},
    '{in_ch:8'd2, out_ch:8'd4, h:8'd8,  w:8'd8,  k:8'd5, n_pe:8'd4, n_op:8'd5,
      pool:8'd2, pool_avg:1'b0, n_sg:8'd3, slots:8'd2,
      k2:8'd0, out_ch2:8'd0, n_pe2:8'd0, n_op2:8'd0, pool2:8'd0, pool2_avg:1'b0},
    '{in_ch:8'd1, out_ch:8'd4, h:8'd8,  w:8'd8,  k:8'd5, n_pe:8'd1, n_op:8'd25,
      pool:8'd0, pool_avg:1'b0, n_sg:8'd6, slots:8'd4,
      k2:8'd0, out_ch2:8'd0, n_pe2:8'd0, n_op2:8'd0, pool2:8'd0, pool2_avg:1'b0},
    '{in_ch:8'd4, out_ch:8'd8, h:8'd6,  w:8'd6,  k:8'd3, n_pe:8'd2, n_op:8'd1,
      pool:8'd2, pool_avg:1'b1, n_sg:8'd2, slots:8'd1,
      k2:8'd0, out_ch2:8'd0, n_pe2:8'd0, n_op2:8'd0, pool2:8'd0, pool2_avg:1'b0}
  };

  localparam int unsigned REGION_WORDS = 32'h1_0000;  // words per subgraph region
  localparam int unsigned OUT_BASE     = 32'h0100_0000;

  // Weights of the first block's convolution.
  function automatic int unsigned conv_weights(engine_cfg_t c);
    return int'(c.out_ch) * int'(c.in_ch) * int'(c.k) * int'(c.k);
  endfunction

  // Output elements of the first block (conv, then pooling if any).
  function automatic int unsigned block_out_elems(engine_cfg_t c);
    int unsigned ho, wo;
    ho = int'(c.h) - int'(c.k) + 1;
    wo = int'(c.w) - int'(c.k) + 1;
    if (c.pool != 0) begin
      ho = ho / int'(c.pool);
      wo = wo / int'(c.pool);
    end
    return ho * wo * int'(c.out_ch);
  endfunction

  // The second block seen as a one-block engine whose input is the first
  // block's output map.
  function automatic engine_cfg_t second_block(engine_cfg_t c);
    engine_cfg_t s;
    s = '0;
    s.in_ch  = c.out_ch;
    s.h      = 8'((int'(c.h) - int'(c.k) + 1) / ((c.pool != 0) ? int'(c.pool) : 1));
    s.w      = 8'((int'(c.w) - int'(c.k) + 1) / ((c.pool != 0) ? int'(c.pool) : 1));
    s.k      = c.k2;
    s.out_ch = c.out_ch2;
    s.n_pe   = c.n_pe2;
    s.n_op   = c.n_op2;
    s.pool   = c.pool2;
    s.pool_avg = c.pool2_avg;
    return s;
  endfunction

  // All weights of a subgraph (first block, then second block).
  function automatic int unsigned weight_elems(engine_cfg_t c);
    return conv_weights(c) + ((c.k2 != 0) ? conv_weights(second_block(c)) : 0);
  endfunction

  function automatic int unsigned input_elems(engine_cfg_t c);
    return int'(c.h) * int'(c.w) * int'(c.in_ch);
  endfunction

  function automatic int unsigned output_elems(engine_cfg_t c);
    return (c.k2 != 0) ? block_out_elems(second_block(c)) : block_out_elems(c);
  endfunction

  function automatic int unsigned ceil_div(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Configuration table as the compile-time mapping would generate it.
  function automatic cfg_table_t build_cfg_table(engine_cfg_arr_t e, int unsigned n_eng);
    cfg_table_t t;
    cfg_entry_t en;
    engine_cfg_t c;
    for (int i = 0; i < MAX_ENG; i++)
      for (int j = 0; j < MAX_SG; j++) begin
        en = '0;
        c  = e[i];
        if (i < int'(n_eng) && j < int'(c.n_sg)) begin
          en.rd_base  = ADDR_W'((i * MAX_SG + j) * REGION_WORDS);
          en.rd_words = LEN_W'(ceil_div(weight_elems(c) + input_elems(c), PACK));
          en.wr_base  = ADDR_W'(OUT_BASE + (i * MAX_SG + j) * REGION_WORDS);
          en.wr_words = LEN_W'(ceil_div(output_elems(c), PACK));
          en.slots    = SLOT_W'(c.slots);
        end
        t[i][j] = en;
      end
    return t;
  endfunction

  // Q8.8 saturation of a wide accumulator already scaled back by FRAC_W.
  function automatic elem_t sat16(logic signed [ACC_W-1:0] v);
    if (v > ACC_W'(signed'(32767)))       return elem_t'(16'sh7fff);
    else if (v < -ACC_W'(signed'(32768))) return elem_t'(16'sh8000);
    else                                  return elem_t'(v[DATA_W-1:0]);
  endfunction

endpackage
