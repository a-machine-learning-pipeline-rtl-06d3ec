// ml_stage -- the added pipeline stage between instruction decode and execute.
//
// An instruction coming out of decode is registered here (ID/ML register).
// During the ML cycle feature_extract forms its feature vector and
// rf_classifier assigns it a delay class; at the next edge the instruction and
// its class move on into the ML/EX register, which feeds the execute stage and
// the clock-class selection. Placing the classifier as its own stage between
// ID and EX, and its inputs and outputs, follow the paper; the register
// layout, the stall/flush behaviour and the handling of instructions outside
// the four classified groups are this design's.
//
// Instructions of group OP_OTHER (loads, stores, branches, ...) carry no
// trained class and always get the slowest class.
//
// Interface:
//   id_valid/id_instr  -- decoded instruction from ID
//   stall              -- the baseline core's stall logic holds the stage
//   flush              -- empties both registers (replay or branch flush)
//   res_valid/res      -- newest result captured behind execute (history)
//   wr_*               -- forest node load port (see rf_classifier)
//   ex_valid/ex_instr/ex_cls -- ML/EX register towards execute
// Timing: two registers, so an instruction accepted at edge k is presented to
// execute with its class after edge k+1 (one cycle in the stage).
module ml_stage
  import ml_pkg::*;
#(
  parameter int unsigned N_TREES     = 10,
  parameter int unsigned NODES       = 512,
  parameter int unsigned MAX_DEPTH   = 10,
  parameter int unsigned NUM_CLASSES = 4,
  localparam int unsigned TW         = (N_TREES > 1) ? $clog2(N_TREES) : 1
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               id_valid,
  input  instr_t             id_instr,
  input  logic               stall,
  input  logic               flush,
  input  logic               res_valid,
  input  logic [XLEN-1:0]    res,
  input  logic               wr_en,
  input  logic [TW-1:0]      wr_tree,
  input  logic [NODE_AW-1:0] wr_addr,
  input  rf_node_t           wr_node,
  output logic               ex_valid,
  output instr_t             ex_instr,
  output logic [CLASS_W-1:0] ex_cls
);

  localparam logic [CLASS_W-1:0] SLOWEST = CLASS_W'(NUM_CLASSES - 1);

  // ID/ML register
  logic   ml_valid;
  instr_t ml_instr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ml_valid <= 1'b0;
      ml_instr <= '0;
    end else if (flush) begin
      ml_valid <= 1'b0;
    end else if (!stall) begin
      ml_valid <= id_valid;
      ml_instr <= id_instr;
    end
  end

  features_t          feat;
  logic [CLASS_W-1:0] rf_cls, ml_cls;

  feature_extract u_feat (
    .clk, .rst_n,
    .grp       (ml_instr.grp),
    .op1       (ml_instr.op1),
    .op2       (ml_instr.op2),
    .advance   (ml_valid && !stall && !flush),
    .res_valid,
    .res,
    .feat
  );

  rf_classifier #(
    .N_TREES(N_TREES), .NODES(NODES), .MAX_DEPTH(MAX_DEPTH), .NUM_CLASSES(NUM_CLASSES)
  ) u_rf (
    .clk, .rst_n, .wr_en, .wr_tree, .wr_addr, .wr_node, .feat, .cls(rf_cls)
  );

  assign ml_cls = (ml_instr.grp == OP_OTHER) ? SLOWEST : rf_cls;

  // ML/EX register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ex_valid <= 1'b0;
      ex_instr <= '0;
      ex_cls   <= SLOWEST;
    end else if (flush) begin
      ex_valid <= 1'b0;
      ex_cls   <= SLOWEST;
    end else if (!stall) begin
      ex_valid <= ml_valid;
      ex_instr <= ml_instr;
      ex_cls   <= ml_cls;
    end
  end

  // A class the clock manager does not know must never reach execute.
  a_cls_range: assert property (@(posedge clk) disable iff (!rst_n)
    ex_valid |-> (32'(ex_cls) < NUM_CLASSES));

endmodule
