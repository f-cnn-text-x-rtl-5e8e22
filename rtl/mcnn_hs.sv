// mcnn_hs: multi-CNN hardware scheduler, the interface between the CNN
// engines and the external memory.
//
// It contains the configuration table, the control unit with the subgraphs
// register, a read and a write memory controller, a read and a write staging
// buffer, and one input and one output FIFO per engine.  Read path: the read
// controller fetches the burst of the engine that owns the current slot into
// the read staging buffer, where each word carries its engine tag; a
// demultiplexer moves it to that engine's input FIFO.  Write path: words an
// engine produces wait in its output FIFO; when the control unit grants the
// write port, a multiplexer moves a burst's worth into the write staging
// buffer, from which the write controller sends it.  The FIFOs turn the bursty,
// time-sliced memory service into continuous streams for the engines.
//
// Engine streams are packed memory words (four Q8.8 elements per 64-bit word)
// with valid/ready handshakes.  The memory side is a simplified AXI-style
// master with separate read and write channels.  `run` enables scheduling.
// Structure and names follow the paper's scheduler figure; the admission and
// write policies are described in mcnn_cu.
module mcnn_hs
  import fcnnx_pkg::*;
#(
  parameter int unsigned N_ENG      = 4,
  parameter int unsigned BURST_LEN  = 1024,
  parameter int unsigned FIFO_DEPTH = BURST_LEN,
  parameter int unsigned STG_DEPTH  = BURST_LEN,
  parameter cfg_table_t  TABLE      = build_cfg_table(DEFAULT_ENGINES, N_ENG),
  parameter int unsigned EW         = (N_ENG > 1) ? $clog2(N_ENG) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  // engines
  output logic              eng_in_valid [N_ENG],
  input  logic              eng_in_ready [N_ENG],
  output word_t             eng_in_data  [N_ENG],
  input  logic              eng_out_valid [N_ENG],
  output logic              eng_out_ready [N_ENG],
  input  word_t             eng_out_data  [N_ENG],
  // memory read channels
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [ADDR_W-1:0] ar_addr,
  output logic [LEN_W-1:0]  ar_len,
  input  logic              r_valid,
  output logic              r_ready,
  input  word_t             r_data,
  input  logic              r_last,
  // memory write channels
  output logic              aw_valid,
  input  logic              aw_ready,
  output logic [ADDR_W-1:0] aw_addr,
  output logic [LEN_W-1:0]  aw_len,
  output logic              w_valid,
  input  logic              w_ready,
  output word_t             w_data,
  output logic              w_last,
  input  logic              b_valid,
  output logic              b_ready,
  // status
  output logic [$clog2(MAX_SG)-1:0] sg_reg [N_ENG],
  output logic [31:0]       slots_used [N_ENG],
  output logic [31:0]       slots_skipped,
  output logic [31:0]       sg_done [N_ENG],
  output logic [31:0]       inferences [N_ENG]
);
  localparam int unsigned CW = $clog2(FIFO_DEPTH + 1);
  localparam logic [LEN_W-1:0] BL = LEN_W'(BURST_LEN);

  // configuration table
  logic tbl_lookup, tbl_valid;
  logic [$clog2(MAX_ENG)-1:0] tbl_eng;
  logic [$clog2(MAX_SG)-1:0]  tbl_sg;
  cfg_entry_t tbl_entry;

  config_table #(.TABLE(TABLE)) u_table (
    .clk, .rst_n, .lookup(tbl_lookup), .eng(tbl_eng), .sg(tbl_sg),
    .entry_valid(tbl_valid), .entry(tbl_entry)
  );

  // control unit
  logic rd_cmd_valid, rd_cmd_ready, rd_done;
  logic [ADDR_W-1:0] rd_cmd_addr, wr_cmd_addr;
  logic [LEN_W-1:0]  rd_cmd_size, wr_cmd_size;
  logic [EW-1:0]     rd_cmd_eng, wsel;
  logic wr_cmd_valid, wr_cmd_ready, wr_done, wcopy_en, wcopy_fire;
  logic [N_ENG-1:0] rfifo_pop;
  logic [CW-1:0] wfifo_count [N_ENG];
  logic [CW-1:0] rfifo_count [N_ENG];

  mcnn_cu #(.N_ENG(N_ENG), .FIFO_DEPTH(FIFO_DEPTH)) u_cu (
    .clk, .rst_n, .run, .burst_len(BL),
    .tbl_lookup, .tbl_eng, .tbl_sg, .tbl_valid, .tbl_entry,
    .rd_cmd_valid, .rd_cmd_ready, .rd_cmd_addr, .rd_cmd_size, .rd_cmd_eng, .rd_done,
    .rfifo_pop,
    .wr_cmd_valid, .wr_cmd_ready, .wr_cmd_addr, .wr_cmd_size, .wr_done,
    .wfifo_count, .wcopy_en, .wsel, .wcopy_fire,
    .sg_reg, .slots_used, .slots_skipped, .sg_done, .inferences
  );

  // read path
  logic rstg_in_valid, rstg_in_ready, rstg_out_valid, rstg_out_ready;
  logic [EW+MEM_W-1:0] rstg_in_data, rstg_out_data;

  read_mem_ctrl #(.TAG_W(EW)) u_rd (
    .clk, .rst_n, .burst_len(BL),
    .cmd_valid(rd_cmd_valid), .cmd_ready(rd_cmd_ready), .cmd_addr(rd_cmd_addr),
    .cmd_size(rd_cmd_size), .cmd_tag(rd_cmd_eng), .done(rd_done),
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last,
    .stg_valid(rstg_in_valid), .stg_ready(rstg_in_ready), .stg_data(rstg_in_data)
  );

  // staging-buffer occupancy, only watched by the assertions below
  logic [$clog2(STG_DEPTH+1)-1:0] rstg_count, wstg_count;

  staging_buffer #(.WIDTH(EW + MEM_W), .DEPTH(STG_DEPTH)) u_rstg (
    .clk, .rst_n,
    .in_valid(rstg_in_valid), .in_ready(rstg_in_ready), .in_data(rstg_in_data),
    .out_valid(rstg_out_valid), .out_ready(rstg_out_ready), .out_data(rstg_out_data),
    .count(rstg_count)
  );

  // demultiplexer to the engines' input FIFOs
  logic [EW-1:0] rtag;
  logic rfifo_in_ready [N_ENG];
  assign rtag = rstg_out_data[EW+MEM_W-1:MEM_W];
  always_comb begin
    rstg_out_ready = 1'b0;
    for (int e = 0; e < N_ENG; e++)
      if (int'(rtag) == e) rstg_out_ready = rfifo_in_ready[e];
  end

  // write path: multiplexer from the engines' output FIFOs
  logic wfifo_out_valid [N_ENG];
  word_t wfifo_out_data [N_ENG];
  logic wstg_in_valid, wstg_in_ready, wstg_out_valid, wstg_out_ready;
  word_t wstg_in_data, wstg_out_data;

  always_comb begin
    wstg_in_valid = 1'b0;
    wstg_in_data  = '0;
    for (int e = 0; e < N_ENG; e++)
      if (int'(wsel) == e) begin
        wstg_in_valid = wcopy_en && wfifo_out_valid[e];
        wstg_in_data  = wfifo_out_data[e];
      end
  end
  assign wcopy_fire = wstg_in_valid && wstg_in_ready;

  for (genvar e = 0; e < N_ENG; e++) begin : g_fifo
    logic rf_valid;
    assign rf_valid     = rstg_out_valid && (int'(rtag) == e);
    assign rfifo_pop[e] = eng_in_valid[e] && eng_in_ready[e];

    sync_fifo #(.WIDTH(MEM_W), .DEPTH(FIFO_DEPTH)) u_rfifo (
      .clk, .rst_n,
      .in_valid(rf_valid), .in_ready(rfifo_in_ready[e]), .in_data(rstg_out_data[MEM_W-1:0]),
      .out_valid(eng_in_valid[e]), .out_ready(eng_in_ready[e]), .out_data(eng_in_data[e]),
      .count(rfifo_count[e])
    );

    sync_fifo #(.WIDTH(MEM_W), .DEPTH(FIFO_DEPTH)) u_wfifo (
      .clk, .rst_n,
      .in_valid(eng_out_valid[e]), .in_ready(eng_out_ready[e]), .in_data(eng_out_data[e]),
      .out_valid(wfifo_out_valid[e]), .out_ready(wcopy_en && int'(wsel) == e && wstg_in_ready),
      .out_data(wfifo_out_data[e]), .count(wfifo_count[e])
    );
  end

  staging_buffer #(.WIDTH(MEM_W), .DEPTH(STG_DEPTH)) u_wstg (
    .clk, .rst_n,
    .in_valid(wstg_in_valid), .in_ready(wstg_in_ready), .in_data(wstg_in_data),
    .out_valid(wstg_out_valid), .out_ready(wstg_out_ready), .out_data(wstg_out_data),
    .count(wstg_count)
  );

  write_mem_ctrl u_wr (
    .clk, .rst_n, .burst_len(BL),
    .cmd_valid(wr_cmd_valid), .cmd_ready(wr_cmd_ready), .cmd_addr(wr_cmd_addr),
    .cmd_size(wr_cmd_size), .done(wr_done),
    .aw_valid, .aw_ready, .aw_addr, .aw_len, .w_valid, .w_ready, .w_data, .w_last,
    .b_valid, .b_ready,
    .stg_valid(wstg_out_valid), .stg_ready(wstg_out_ready), .stg_data(wstg_out_data)
  );

  a_rfifo_never_blocks: assert property (@(posedge clk) disable iff (!rst_n)
    rstg_out_valid |-> rstg_out_ready);
  // neither staging buffer ever holds more than one burst
  a_stg_one_burst: assert property (@(posedge clk) disable iff (!rst_n)
    int'(rstg_count) <= int'(BURST_LEN) && int'(wstg_count) <= int'(BURST_LEN));
endmodule
