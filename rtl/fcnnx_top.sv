// fcnnx_top: multi-CNN accelerator, N heterogeneous CNN engines running in
// parallel and sharing one external memory through the multi-CNN hardware
// scheduler (MCNN-HS).
//
// Each engine is a streaming pipeline built for one CNN (shape, C-PE count and
// dot-product width per engine come from ENGINES); the scheduler gives the
// engines the memory port in round-robin slots of one burst, each engine
// holding as many consecutive slots as the compile-time configuration table
// assigns to its current subgraph, and returns their results to memory.  The
// external memory is reached through a simplified AXI-style master (separate
// read and write channels, word addresses, burst length BURST_LEN); the memory
// itself is outside the design.  `run` starts the schedule, which then repeats
// every engine's list of subgraphs for ever.  The status outputs are the
// subgraphs register and event counters of the scheduler.
//
// The two-part structure (engines + MCNN-HS), the round-robin slot mechanism,
// the 64-bit port with four packed 16-bit values and the burst length of 1024
// follow the paper; the engine shapes are small examples of this design.
module fcnnx_top
  import fcnnx_pkg::*;
#(
  parameter int unsigned     N_ENG     = 4,
  parameter int unsigned     BURST_LEN = 1024,
  parameter engine_cfg_arr_t ENGINES   = DEFAULT_ENGINES,
  parameter int unsigned     EW        = (N_ENG > 1) ? $clog2(N_ENG) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  output logic              ar_valid,
  input  logic              ar_ready,
  output logic [ADDR_W-1:0] ar_addr,
  output logic [LEN_W-1:0]  ar_len,
  input  logic              r_valid,
  output logic              r_ready,
  input  word_t             r_data,
  input  logic              r_last,
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
  output logic [$clog2(MAX_SG)-1:0] sg_reg [N_ENG],
  output logic [31:0]       slots_used [N_ENG],
  output logic [31:0]       slots_skipped,
  output logic [31:0]       sg_done [N_ENG],
  output logic [31:0]       inferences [N_ENG],
  output logic [N_ENG-1:0]  conv_busy
);
  logic  ei_valid [N_ENG], ei_ready [N_ENG], eo_valid [N_ENG], eo_ready [N_ENG];
  word_t ei_data [N_ENG], eo_data [N_ENG];

  mcnn_hs #(.N_ENG(N_ENG), .BURST_LEN(BURST_LEN),
            .TABLE(build_cfg_table(ENGINES, N_ENG))) u_hs (
    .clk, .rst_n, .run,
    .eng_in_valid(ei_valid), .eng_in_ready(ei_ready), .eng_in_data(ei_data),
    .eng_out_valid(eo_valid), .eng_out_ready(eo_ready), .eng_out_data(eo_data),
    .ar_valid, .ar_ready, .ar_addr, .ar_len, .r_valid, .r_ready, .r_data, .r_last,
    .aw_valid, .aw_ready, .aw_addr, .aw_len, .w_valid, .w_ready, .w_data, .w_last,
    .b_valid, .b_ready,
    .sg_reg, .slots_used, .slots_skipped, .sg_done, .inferences
  );

  for (genvar e = 0; e < N_ENG; e++) begin : g_eng
    localparam engine_cfg_t C = ENGINES[e];
    cnn_engine #(
      .IN_CH(int'(C.in_ch)), .OUT_CH(int'(C.out_ch)), .H(int'(C.h)), .W(int'(C.w)),
      .K(int'(C.k)), .N_PE(int'(C.n_pe)), .N_OP(int'(C.n_op)),
      .POOL(int'(C.pool)), .POOL_AVG(C.pool_avg),
      .K2(int'(C.k2)), .OUT_CH2(int'(C.out_ch2)), .N_PE2(int'(C.n_pe2)), .N_OP2(int'(C.n_op2)),
      .POOL2(int'(C.pool2)), .POOL2_AVG(C.pool2_avg)
    ) u_eng (
      .clk, .rst_n,
      .in_valid(ei_valid[e]), .in_ready(ei_ready[e]), .in_data(ei_data[e]),
      .out_valid(eo_valid[e]), .out_ready(eo_ready[e]), .out_data(eo_data[e]),
      .conv_busy(conv_busy[e])
    );
  end
endmodule
