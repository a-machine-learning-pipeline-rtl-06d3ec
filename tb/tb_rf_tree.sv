// tb_rf_tree -- self-checking test of one decision tree.
//
// Checks that a reset tree votes for the slowest class, then loads random
// trees through the write port and compares the tree's class with the
// reference walk of tb_rf_pkg for random feature vectors, including vectors
// whose values sit exactly on a threshold (the "<=" goes left). A tree deeper
// than MAX_DEPTH must vote for the slowest class.
module tb_rf_tree;
  import ml_pkg::*;
  import tb_rf_pkg::*;
  localparam int NN = 64, D = 5, NC = 4;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [NODE_AW-1:0] wr_addr = 0;
  rf_node_t wr_node = '0;
  features_t feat;
  logic [CLASS_W-1:0] cls;
  int checks = 0, failures = 0;

  rf_tree #(.NODES(NN), .MAX_DEPTH(D), .NUM_CLASSES(NC)) dut (.*);

  always #500 clk = ~clk;

  initial begin
    #50000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  task automatic load(rf_model m);
    for (int n = 0; n < NN; n++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = NODE_AW'(n); wr_node = m.flat[n];
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  rf_model m;
  int e, k;

  initial begin
    feat = rand_features();
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check(int'(cls) == NC - 1, "reset tree votes slowest");

    for (int rep = 0; rep < 6; rep++) begin
      m = new(1, NN, D, NC);
      m.gen_tree(0, (rep == 0) ? 0 : 25);
      load(m);
      for (int i = 0; i < 400; i++) begin
        feat = rand_features();
        if (i % 4 == 0) begin
          // put one operand exactly on a threshold used somewhere in the tree
          k = int'($urandom_range(0, m.used[0] - 1));
          feat.op1 = m.flat[k].thresh;
          feat.xop2 = m.flat[k].thresh;
        end
        #10;
        e = m.walk(0, feat);
        check(int'(cls) == e, $sformatf("tree rep %0d vec %0d got %0d exp %0d", rep, i, cls, e));
      end
    end

    // a chain of inner nodes longer than MAX_DEPTH -> slowest class
    m = new(1, NN, D, NC);
    for (int n = 0; n <= D; n++) begin
      m.flat[n] = '0;
      m.flat[n].fidx = 4'd4;
      m.flat[n].thresh = 32'hFFFF_FFFF;      // always left
      m.flat[n].left = NODE_AW'(n + 1);
      m.flat[n].right = NODE_AW'(n + 1);
    end
    m.flat[D + 1] = '0; m.flat[D + 1].leaf = 1; m.flat[D + 1].cls = 0;
    load(m);
    feat = rand_features();
    #10 check(int'(cls) == NC - 1, "too deep tree votes slowest");
    // the same chain one level shorter reaches the fast leaf
    m.flat[D] = '0; m.flat[D].leaf = 1; m.flat[D].cls = 0;
    load(m);
    #10 check(int'(cls) == 0, "depth-limit tree reaches leaf");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
