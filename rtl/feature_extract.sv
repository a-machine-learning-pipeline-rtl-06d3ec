// feature_extract -- builds the classifier's feature vector and keeps the
// computation history it needs.
//
// For the instruction held in the ML stage it forms the nine features the
// forest looks at: the 4-bit one-hot instruction type, the two operands, each
// operand XORed with the same operand of the previous instruction (the
// "toggled input bits"), and the output of the preceding instruction. The
// feature set and the XOR definition follow the paper.
//
// History registers:
//   prev_op1/prev_op2 -- operands of the last instruction that left the ML
//                        stage (loaded when `advance` is high).
//   prev_out          -- the last result captured at the end of an execute
//                        cycle (loaded when `res_valid` is high).
// Because the stage sits right in front of execute, the preceding
// instruction is still executing while the current one is classified; its
// result is not known yet. This design therefore uses the newest result that
// has already been captured (normally the one of the instruction two ahead),
// a choice of this design. Reset clears all history to zero; a replay does
// not roll it back.
//
// Timing: features are combinational from the ML-stage contents and the
// history registers; history updates on the rising clock edge.
module feature_extract
  import ml_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // instruction currently in the ML stage
  input  op_group_e       grp,
  input  logic [XLEN-1:0] op1,
  input  logic [XLEN-1:0] op2,
  input  logic            advance,     // that instruction leaves the stage this cycle
  // newest result captured behind execute
  input  logic            res_valid,
  input  logic [XLEN-1:0] res,
  output features_t       feat
);

  logic [XLEN-1:0] prev_op1, prev_op2, prev_out;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prev_op1 <= '0;
      prev_op2 <= '0;
      prev_out <= '0;
    end else begin
      if (advance) begin
        prev_op1 <= op1;
        prev_op2 <= op2;
      end
      if (res_valid) prev_out <= res;
    end
  end

  always_comb begin
    feat.itype    = onehot_type(grp);
    feat.op1      = op1;
    feat.op2      = op2;
    feat.xop1     = op1 ^ prev_op1;
    feat.xop2     = op2 ^ prev_op2;
    feat.prev_out = prev_out;
  end

endmodule
