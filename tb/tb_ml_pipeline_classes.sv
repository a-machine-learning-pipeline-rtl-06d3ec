// tb_ml_pipeline_classes -- the system test for the two- and three-class
// configurations.
//
// Runs two ml_system_harness instances side by side, one with two delay
// classes (periods 2.2 and 4.0 ns) and one with three (1.8, 2.6 and 4.0 ns),
// each with its own random program, forest, clock and execution-unit model,
// and adds up their checks. The four-class configuration at full size is
// covered by tb_ml_pipeline_top.
module tb_ml_pipeline_classes;
  int c2, f2, c3, f3;
  bit d2, d3;

  ml_system_harness #(.NC(2), .NT(5), .NN(128), .D(8), .NPROG(1500)) u_two   (.checks(c2), .failures(f2), .done(d2));
  ml_system_harness #(.NC(3), .NT(5), .NN(128), .D(8), .NPROG(1500)) u_three (.checks(c3), .failures(f3), .done(d3));

  initial begin
    fork
      wait (d2 && d3);
      #400000000;
    join_any
    if (!(d2 && d3)) begin
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", c2 + c3, f2 + f3 + 1);
    end else begin
      $display("TB_RESULT checks=%0d failures=%0d", c2 + c3, f2 + f3);
    end
    $finish;
  end
endmodule
