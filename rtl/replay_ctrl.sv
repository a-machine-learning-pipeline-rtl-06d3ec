// replay_ctrl -- clock-class selection and re-execution after a timing error.
//
// Clock class: the period of each execute cycle is chosen by the class of the
// instruction sitting in the ML/EX register (clk_cls, read by the clock
// manager right after the edge that starts the cycle). Cycles with no
// instruction in execute use the fastest class. This follows the paper's
// per-instruction clock adjustment; the bubble rule is this design's.
//
// Replay: when the double-sampling detector reports that the result captured
// at the last edge was wrong (err), this block, at the next edge,
//   * flushes IF, ID, ML and EX (flush is combinational from err so that it
//     takes effect at that very edge),
//   * redirects fetch to the failing instruction's PC, which it recorded when
//     the instruction was launched from the ML/EX register, and
//   * marks the next instruction to reach execute -- the re-fetched one -- to
//     run with the slowest, worst-case clock class.
// Re-executing with the worst-case clock, and the re-run of IF, ID, ML and EX
// (four cycles) follow the paper. The extra cycle in which the shadow sample is
// compared is this design's: a replayed instruction completes execute five
// edges after its failed attempt.
//
// Interface: ex_valid/ex_pc/ex_cls from the ML/EX register, stall from the
// baseline core, err from timing_error_detector.
module replay_ctrl
  import ml_pkg::*;
#(
  parameter int unsigned NUM_CLASSES = 4
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               ex_valid,
  input  logic [XLEN-1:0]    ex_pc,
  input  logic [CLASS_W-1:0] ex_cls,
  input  logic               stall,
  input  logic               err,
  output logic               flush,
  output logic               redirect_valid,
  output logic [XLEN-1:0]    redirect_pc,
  output logic [CLASS_W-1:0] clk_cls,
  output logic               replay_slow     // current EX cycle is a worst-case re-execution
);

  localparam logic [CLASS_W-1:0] SLOWEST = CLASS_W'(NUM_CLASSES - 1);

  logic [XLEN-1:0] cap_pc;        // PC of the instruction captured at the last edge
  logic            pending_slow;  // next instruction into execute is a re-execution

  wire launch = ex_valid && !stall;   // instruction leaves execute at the next edge

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cap_pc       <= '0;
      pending_slow <= 1'b0;
    end else begin
      if (launch) cap_pc <= ex_pc;
      if (err)
        pending_slow <= 1'b1;
      else if (launch && pending_slow)
        pending_slow <= 1'b0;
    end
  end

  // Every error arms a worst-case re-execution, and a re-execution uses the
  // slowest class.
  a_err_arms: assert property (@(posedge clk) disable iff (!rst_n) err |=> pending_slow);
  a_slow_cls: assert property (@(posedge clk) disable iff (!rst_n)
    replay_slow |-> (clk_cls == SLOWEST));

  assign flush          = err;
  assign redirect_valid = err;
  assign redirect_pc    = cap_pc;
  assign replay_slow    = pending_slow && ex_valid;

  always_comb begin
    if (!ex_valid)        clk_cls = '0;
    else if (pending_slow) clk_cls = SLOWEST;
    else                  clk_cls = ex_cls;
  end

endmodule
