// timing_error_detector -- double sampling of the execute-stage output.
//
// The execute result is captured twice: by the main register on the rising
// edge of clk (the edge whose period the delay class chose) and by a shadow
// register on the rising edge of clk_shadow, a copy of clk delayed by a fixed
// guard time. If the result had not settled at the main edge the two samples
// differ, and `err` flags a timing violation for the instruction just
// captured. The paper states only that the output is double-sampled to detect
// timing violations; the Razor-like two-register form is this design's.
//
// Requirements on the clocks (this design's, not the paper's):
//   * the guard time must be shorter than the shortest delay through execute,
//     so the shadow edge still sees the captured instruction's result and not
//     the next one's;
//   * a violation is caught only if the result settles before the shadow
//     edge, so the guard time should cover the distance between neighbouring
//     class periods.
//
// Interface: d is the execute output, in_valid says an instruction completes
// execute at this clk edge. q/q_valid is the main sample (the EX/MEM
// register). err is valid from the shadow edge to the next clk edge; a
// consumer samples it on the next rising edge of clk, and the stage behind
// execute must not commit q while err is high.
module timing_error_detector
  import ml_pkg::*;
(
  input  logic            clk,
  input  logic            clk_shadow,
  input  logic            rst_n,
  input  logic            in_valid,
  input  logic [XLEN-1:0] d,
  output logic            q_valid,
  output logic [XLEN-1:0] q,
  output logic            err
);

  logic [XLEN-1:0] shadow_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q       <= '0;
      q_valid <= 1'b0;
    end else begin
      q       <= d;
      q_valid <= in_valid;
    end
  end

  always_ff @(posedge clk_shadow or negedge rst_n) begin
    if (!rst_n) shadow_q <= '0;
    else        shadow_q <= d;
  end

  assign err = q_valid && (q != shadow_q);

endmodule
