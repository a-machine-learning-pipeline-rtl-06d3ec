// ml_pipeline_top -- the delay-classifying stage and its clock/replay support,
// as inserted between decode and execute of a five-stage 32-bit pipeline.
//
// Data path: ID -> ml_stage (features + random forest, one cycle) -> EX.
// The class of the instruction entering execute picks the period of that
// execute cycle (clk_cls to the clock manager). The execute output is double
// sampled (timing_error_detector); when the two samples differ the result is
// dropped (mem_valid low) and replay_ctrl flushes the front end, re-fetches the
// failing instruction and runs it again with the worst-case clock.
//
// What the paper gives: the stage's place in the pipeline, its features, the
// random-forest model, the delay classes, double sampling and re-execution
// with the worst-case clock. What this design adds: the exact registers, the
// loadable forest tables, the handshake signals and the bubble/stall rules
// (see each submodule).
//
// The baseline core's IF, ID, EX, MEM and WB stages and the clock manager are
// outside this module; their connections are ports:
//   ID:    id_valid, id_instr, stall (core stall logic), core_flush (branches)
//   EX:    ex_valid, ex_instr launched to the execution unit, ex_result back
//   MEM:   mem_valid/mem_result/mem_pc, the checked EX/MEM contents
//   IF/ID: front_flush, redirect_valid, redirect_pc
//   clock: clk (variable period), clk_shadow (clk delayed by the guard time),
//          clk_cls (class of the execute cycle that has just started)
//   load:  wr_* writes forest nodes
module ml_pipeline_top
  import ml_pkg::*;
#(
  parameter int unsigned N_TREES     = 10,
  parameter int unsigned NODES       = 512,
  parameter int unsigned MAX_DEPTH   = 10,
  parameter int unsigned NUM_CLASSES = 4,
  localparam int unsigned TW         = (N_TREES > 1) ? $clog2(N_TREES) : 1
)(
  input  logic               clk,
  input  logic               clk_shadow,
  input  logic               rst_n,
  // from decode
  input  logic               id_valid,
  input  instr_t             id_instr,
  input  logic               stall,
  input  logic               core_flush,
  // to / from execute
  output logic               ex_valid,
  output instr_t             ex_instr,
  input  logic [XLEN-1:0]    ex_result,
  // to memory stage
  output logic               mem_valid,
  output logic [XLEN-1:0]    mem_result,
  output logic [XLEN-1:0]    mem_pc,
  // to fetch / decode
  output logic               front_flush,
  output logic               redirect_valid,
  output logic [XLEN-1:0]    redirect_pc,
  // to the clock manager
  output logic [CLASS_W-1:0] clk_cls,
  output logic               replay_slow,
  // forest load port
  input  logic               wr_en,
  input  logic [TW-1:0]      wr_tree,
  input  logic [NODE_AW-1:0] wr_addr,
  input  rf_node_t           wr_node
);

  logic               flush_all, err, q_valid;
  logic [XLEN-1:0]    q;
  logic [CLASS_W-1:0] ex_cls;
  logic               replay_flush;

  assign flush_all = replay_flush || core_flush;

  ml_stage #(
    .N_TREES(N_TREES), .NODES(NODES), .MAX_DEPTH(MAX_DEPTH), .NUM_CLASSES(NUM_CLASSES)
  ) u_ml (
    .clk, .rst_n,
    .id_valid, .id_instr,
    .stall,
    .flush     (flush_all),
    .res_valid (mem_valid),
    .res       (q),
    .wr_en, .wr_tree, .wr_addr, .wr_node,
    .ex_valid, .ex_instr, .ex_cls
  );

  timing_error_detector u_det (
    .clk, .clk_shadow, .rst_n,
    .in_valid (ex_valid && !stall && !flush_all),
    .d        (ex_result),
    .q_valid,
    .q,
    .err
  );

  replay_ctrl #(.NUM_CLASSES(NUM_CLASSES)) u_replay (
    .clk, .rst_n,
    .ex_valid,
    .ex_pc         (ex_instr.pc),
    .ex_cls,
    .stall         (stall || flush_all),
    .err,
    .flush         (replay_flush),
    .redirect_valid,
    .redirect_pc,
    .clk_cls,
    .replay_slow
  );

  assign mem_valid   = q_valid && !err;
  assign mem_result  = q;
  assign mem_pc      = redirect_pc;
  assign front_flush = flush_all;

endmodule
