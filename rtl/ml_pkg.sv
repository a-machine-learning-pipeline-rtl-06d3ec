// ml_pkg -- types and constants shared by the delay-classifying pipeline stage.
//
// The stage classifies every instruction between decode and execute into a
// propagation-delay class and the clock period of its execute cycle is taken
// from that class. This package holds:
//   * the instruction-type encoding the classifier sees as its one-hot
//     "instr" feature (arithmetic, arithmetic with immediate, logical,
//     multiply/divide; the four groups and their one-hot codes follow the
//     paper, the extra OP_OTHER for every other instruction is this design's),
//   * the feature numbering used by the forest's node tables (nine features:
//     four one-hot type bits, op1, op2, op1^prev_op1, op2^prev_op2, previous
//     output -- the nine-feature count follows the paper, the order is ours),
//   * the random-forest node record written into the node tables,
//   * the class boundaries of the paper's 2-, 3- and 4-class configurations
//     in picoseconds against the 4 ns worst-case delay. The clock period of a
//     class is the upper boundary of its delay interval.
package ml_pkg;

  parameter int unsigned XLEN = 32;             // baseline datapath width

  // Instruction groups seen by the classifier.
  typedef enum logic [2:0] {
    OP_ARITH     = 3'd0,   // register-register arithmetic
    OP_ARITH_IMM = 3'd1,   // arithmetic with immediate operand
    OP_LOGIC     = 3'd2,   // logical
    OP_MULDIV    = 3'd3,   // multiplication or division
    OP_OTHER     = 3'd4    // anything else: not classified, worst-case clock
  } op_group_e;

  // One-hot "instr" subfeature, bit 3 = arithmetic ... bit 0 = mul/div,
  // so that the printed codes 1000/0100/0010/0001 read as written.
  function automatic logic [3:0] onehot_type(op_group_e g);
    unique case (g)
      OP_ARITH:     return 4'b1000;
      OP_ARITH_IMM: return 4'b0100;
      OP_LOGIC:     return 4'b0010;
      OP_MULDIV:    return 4'b0001;
      default:      return 4'b0000;
    endcase
  endfunction

  // Feature indices used in the node tables.
  parameter int unsigned NUM_FEATURES = 9;
  typedef enum logic [3:0] {
    F_T_ARITH  = 4'd0,   // one-hot bit "arithmetic"
    F_T_IMM    = 4'd1,   // one-hot bit "arithmetic with immediate"
    F_T_LOGIC  = 4'd2,   // one-hot bit "logical"
    F_T_MULDIV = 4'd3,   // one-hot bit "multiplication or division"
    F_OP1      = 4'd4,
    F_OP2      = 4'd5,
    F_XOP1     = 4'd6,
    F_XOP2     = 4'd7,
    F_PREV_OUT = 4'd8
  } feature_e;

  // The nine features as they enter the forest. Type bits are zero-extended.
  typedef struct packed {
    logic [3:0]      itype;     // one-hot, bit 3 = arithmetic
    logic [XLEN-1:0] op1;
    logic [XLEN-1:0] op2;
    logic [XLEN-1:0] xop1;
    logic [XLEN-1:0] xop2;
    logic [XLEN-1:0] prev_out;
  } features_t;

  function automatic logic [XLEN-1:0] feature_value(features_t f, logic [3:0] idx);
    unique case (idx)
      F_T_ARITH:  return XLEN'(f.itype[3]);
      F_T_IMM:    return XLEN'(f.itype[2]);
      F_T_LOGIC:  return XLEN'(f.itype[1]);
      F_T_MULDIV: return XLEN'(f.itype[0]);
      F_OP1:      return f.op1;
      F_OP2:      return f.op2;
      F_XOP1:     return f.xop1;
      F_XOP2:     return f.xop2;
      F_PREV_OUT: return f.prev_out;
      default:    return '0;
    endcase
  endfunction

  // Node tables: pointers are this wide, so a tree holds up to 2**NODE_AW nodes.
  parameter int unsigned NODE_AW = 9;
  parameter int unsigned CLASS_W = 2;            // up to four delay classes

  // One node. An inner node sends the walk to `left` when
  // feature[fidx] <= thresh (unsigned), else to `right`. A leaf carries
  // its class in `cls`.
  typedef struct packed {
    logic               leaf;
    logic [3:0]         fidx;
    logic [XLEN-1:0]    thresh;
    logic [NODE_AW-1:0] left;
    logic [NODE_AW-1:0] right;
    logic [CLASS_W-1:0] cls;
  } rf_node_t;

  // Decoded instruction as it travels ID -> ML -> EX. `ctrl` carries the
  // rest of the baseline core's decoded control word untouched; its width is
  // this design's placeholder.
  parameter int unsigned CTRL_W = 16;
  typedef struct packed {
    logic [XLEN-1:0]   pc;
    op_group_e         grp;
    logic [XLEN-1:0]   op1;
    logic [XLEN-1:0]   op2;
    logic [CTRL_W-1:0] ctrl;
  } instr_t;

  // Worst-case delay and class boundaries, picoseconds.
  parameter int unsigned T_WORST_PS = 4000;

  // Clock period (upper delay boundary) of class c in an n-class configuration.
  //   2 classes: [0,2.2] (2.2,4.0]
  //   3 classes: [0,1.8] (1.8,2.6] (2.6,4.0]
  //   4 classes: [0,1.0] (1.0,2.0] (2.0,3.0] (3.0,4.0]
  function automatic int unsigned class_period_ps(int unsigned n, int unsigned c);
    if (n == 2)      return (c == 0) ? 2200 : 4000;
    else if (n == 3) return (c == 0) ? 1800 : (c == 1) ? 2600 : 4000;
    else             return (c + 1) * 1000;
  endfunction

endpackage
