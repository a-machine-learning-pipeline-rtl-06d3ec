// tb_rf_vote -- self-checking test of the forest's vote.
//
// Applies directed and random sets of per-tree classes and compares the winner
// with a count done here: most votes wins, a tie goes to the slower class.
module tb_rf_vote;
  import ml_pkg::*;
  localparam int NT = 5, NC = 4;

  logic [CLASS_W-1:0] votes [NT];
  logic [CLASS_W-1:0] cls;
  int checks = 0, failures = 0;

  rf_vote #(.N_TREES(NT), .NUM_CLASSES(NC)) dut (.votes, .cls);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int ref_vote();
    int cnt[NC];
    int bc = NC - 1;
    foreach (cnt[c]) cnt[c] = 0;
    foreach (votes[t]) cnt[votes[t]]++;
    for (int c = NC - 2; c >= 0; c--) if (cnt[c] > cnt[bc]) bc = c;
    return bc;
  endfunction

  task automatic apply_check();
    #10;
    checks++;
    if (int'(cls) != ref_vote()) begin
      failures++;
      if (failures < 10) $display("FAIL votes %p got %0d exp %0d", votes, cls, ref_vote());
    end
  endtask

  initial begin
    // directed: clear majority, two-way tie, all the same
    votes = '{2'd0, 2'd0, 2'd0, 2'd3, 2'd1}; apply_check();
    if (cls != 0) failures++;
    checks++;
    votes = '{2'd0, 2'd0, 2'd2, 2'd2, 2'd1}; apply_check();
    if (cls != 2) failures++;
    checks++;
    votes = '{2'd1, 2'd1, 2'd1, 2'd1, 2'd1}; apply_check();
    for (int i = 0; i < 3000; i++) begin
      foreach (votes[t]) votes[t] = CLASS_W'($urandom_range(0, NC - 1));
      apply_check();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
