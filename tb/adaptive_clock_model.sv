// adaptive_clock_model -- behavioural stand-in for the per-instruction clock
// manager (simulation only, not synthesizable).
//
// After each rising edge of clk it reads the delay class the pipeline asks
// for (cls, valid 1 ps after the edge) and makes the coming clock period the
// upper delay boundary of that class (ml_pkg::class_period_ps), switching with
// no settling time. clk_shadow is a 100 ps pulse GUARD_PS after every rising
// edge of clk, for the double-sampling registers. Time unit: 1 ps. The clock
// starts once `en` is high. It also counts the cycles and the time spent.
module adaptive_clock_model
  import ml_pkg::*;
#(
  parameter int unsigned NUM_CLASSES = 4,
  parameter int unsigned GUARD_PS    = 500
)(
  input  logic               en,
  input  logic [CLASS_W-1:0] cls,
  output logic               clk,
  output logic               clk_shadow,
  output longint unsigned    cycles,
  output longint unsigned    busy_ps
);

  int unsigned p;

  initial begin
    clk = 0; clk_shadow = 0; cycles = 0; busy_ps = 0;
    wait (en);
    forever begin
      clk = 1;
      #1;
      p = class_period_ps(NUM_CLASSES, int'(cls));
      cycles++;
      busy_ps += p;
      fork
        begin
          #(GUARD_PS - 1) clk_shadow = 1;
          #100 clk_shadow = 0;
        end
      join_none
      #(p / 2 - 1) clk = 0;
      #(p - p / 2);
    end
  end

endmodule
