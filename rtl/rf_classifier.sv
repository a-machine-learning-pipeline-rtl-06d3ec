// rf_classifier -- random-forest delay classifier.
//
// N_TREES decision trees (rf_tree) see the same feature vector in parallel and
// rf_vote turns their decisions into one delay class, 0 = fastest clock,
// NUM_CLASSES-1 = worst-case clock. The random forest as the model, the
// grid it was picked from (1..200 trees, depth 10..50) and the 2/3/4-class
// configurations follow the paper. The paper does not print the forest it
// finally used; the defaults (10 trees of depth 10, 512 nodes each) are this
// design's and are meant to be overridden to match a trained model.
//
// Interface: the forest is loaded through a node write port: wr_en, the tree
// index wr_tree, the node index wr_addr and the node record wr_node
// (ml_pkg::rf_node_t). Reset leaves every tree voting for the slowest class.
// Timing: cls is combinational from feat, one ML-stage cycle.
module rf_classifier
  import ml_pkg::*;
#(
  parameter int unsigned N_TREES     = 10,
  parameter int unsigned NODES       = 512,
  parameter int unsigned MAX_DEPTH   = 10,
  parameter int unsigned NUM_CLASSES = 4,
  localparam int unsigned TW         = (N_TREES > 1) ? $clog2(N_TREES) : 1
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_en,
  input  logic [TW-1:0]      wr_tree,
  input  logic [NODE_AW-1:0] wr_addr,
  input  rf_node_t           wr_node,
  input  features_t          feat,
  output logic [CLASS_W-1:0] cls
);

  logic [CLASS_W-1:0] votes [N_TREES];

  for (genvar t = 0; t < N_TREES; t++) begin : g_tree
    rf_tree #(
      .NODES(NODES), .MAX_DEPTH(MAX_DEPTH), .NUM_CLASSES(NUM_CLASSES)
    ) u_tree (
      .clk, .rst_n,
      .wr_en   (wr_en && (32'(wr_tree) == t)),
      .wr_addr,
      .wr_node,
      .feat,
      .cls     (votes[t])
    );
  end

  rf_vote #(.N_TREES(N_TREES), .NUM_CLASSES(NUM_CLASSES)) u_vote (
    .votes, .cls
  );

endmodule
