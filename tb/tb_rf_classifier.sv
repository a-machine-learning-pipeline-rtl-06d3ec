// tb_rf_classifier -- self-checking test of the random forest.
//
// Loads a random forest of five trees through the tree/node write port and
// compares the forest's class with the reference model (walk every tree,
// majority vote, ties to the slower class) for random feature vectors. Before
// loading, the forest must answer with the slowest class. Every class must be
// produced at least once.
module tb_rf_classifier;
  import ml_pkg::*;
  import tb_rf_pkg::*;
  localparam int NT = 5, NN = 32, D = 4, NC = 4;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [2:0] wr_tree = 0;
  logic [NODE_AW-1:0] wr_addr = 0;
  rf_node_t wr_node = '0;
  features_t feat;
  logic [CLASS_W-1:0] cls;
  int checks = 0, failures = 0;
  int seen [NC];

  rf_classifier #(.N_TREES(NT), .NODES(NN), .MAX_DEPTH(D), .NUM_CLASSES(NC)) dut (.*);

  always #500 clk = ~clk;

  initial begin
    #100000000;
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

  rf_model m;
  int e;

  initial begin
    foreach (seen[c]) seen[c] = 0;
    feat = rand_features();
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1 check(int'(cls) == NC - 1, "empty forest votes slowest");
    for (int rep = 0; rep < 4; rep++) begin
      m = new(NT, NN, D, NC);
      m.gen_all(20);
      for (int t = 0; t < NT; t++)
        for (int n = 0; n < NN; n++) begin
          @(negedge clk);
          wr_en = 1; wr_tree = 3'(t); wr_addr = NODE_AW'(n); wr_node = m.flat[t * NN + n];
        end
      @(negedge clk);
      wr_en = 0;
      for (int i = 0; i < 1000; i++) begin
        feat = rand_features();
        #10;
        e = m.predict(feat);
        seen[e]++;
        check(int'(cls) == e, $sformatf("forest rep %0d vec %0d got %0d exp %0d", rep, i, cls, e));
      end
    end
    foreach (seen[c]) check(seen[c] > 0, $sformatf("class %0d produced", c));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
