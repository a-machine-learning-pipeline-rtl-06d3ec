// rf_vote -- combines the decisions of the forest's trees into one delay class.
//
// Every tree votes for one class; the class with most votes wins. On a tie the
// slower class wins, because a too-slow clock only costs time while a too-fast
// one costs a re-execution. The paper says the forest's decision averages the
// trees' decisions; it does not say how in hardware. A plain majority vote of
// hard per-tree classes is this design's choice (a software forest averages
// per-class probabilities, which can differ from a majority vote when leaves
// are impure).
//
// Interface: votes[t] is tree t's class; cls is the winner. Purely
// combinational.
module rf_vote
  import ml_pkg::*;
#(
  parameter int unsigned N_TREES     = 10,
  parameter int unsigned NUM_CLASSES = 4
)(
  input  logic [CLASS_W-1:0] votes [N_TREES],
  output logic [CLASS_W-1:0] cls
);

  localparam int unsigned CW = $clog2(N_TREES + 1);

  logic [CW-1:0] count [NUM_CLASSES];
  logic [CW-1:0] best;

  always_comb begin
    for (int c = 0; c < NUM_CLASSES; c++) begin
      count[c] = '0;
      for (int t = 0; t < N_TREES; t++)
        if (32'(votes[t]) == c) count[c] = count[c] + 1'b1;
    end
    // ">=" while scanning upwards lets the slower class win ties
    cls  = '0;
    best = count[0];
    for (int c = 1; c < NUM_CLASSES; c++) begin
      if (count[c] >= best) begin
        best = count[c];
        cls  = CLASS_W'(c);
      end
    end
  end

endmodule
