// tb_timing_error_detector -- self-checking test of the double-sampling
// detector.
//
// clk has a 2 ns period and clk_shadow follows it by a 0.5 ns guard time.
// Each cycle the data input gets a new random value either 0.3 ns before the
// main edge (on time) or 0.2 ns after it (late, but before the shadow edge).
// Between the shadow edge and the next main edge the test checks the main
// sample, q_valid, and that err is raised exactly for valid late values that
// differ from the value they replaced.
module tb_timing_error_detector;
  import ml_pkg::*;

  logic clk = 0, clk_shadow = 0, rst_n = 0;
  logic in_valid = 0;
  logic [31:0] d = 0;
  logic q_valid, err;
  logic [31:0] q;
  int checks = 0, failures = 0, n_err = 0, n_ok = 0;

  timing_error_detector dut (.*);

  initial begin
    #100000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always #1000 clk = ~clk;
  always @(posedge clk) begin
    #500 clk_shadow = 1;
    #500 clk_shadow = 0;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  logic [31:0] old_v, new_v;
  bit late, v;

  initial begin
    @(posedge clk);
    #100 rst_n = 1;
    @(posedge clk);
    for (int i = 0; i < 3000; i++) begin
      // now just after a main edge at time E; next main edge at E + 2000
      old_v = d;
      new_v = (i % 5 == 0) ? old_v : $urandom;
      late  = $urandom_range(0, 2) == 0;
      v     = $urandom_range(0, 3) != 0;
      #1000;                             // E + 1000 (clk low)
      in_valid = v;
      if (!late) begin
        #700 d = new_v;                  // E + 1700, before the main edge
        @(posedge clk);
      end else begin
        @(posedge clk);
        #200 d = new_v;                  // main edge + 200, before shadow
      end
      #600;                              // after the shadow edge
      check(q_valid == v, "q_valid");
      check(q == (late ? old_v : new_v), "main sample");
      check(err == (v && late && (new_v != old_v)), "err");
      if (err) n_err++; else n_ok++;
      @(posedge clk);
    end
    check(n_err > 0 && n_ok > 0, "both outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
