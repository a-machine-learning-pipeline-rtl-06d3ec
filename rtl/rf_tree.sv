// rf_tree -- one decision tree of the delay-classifying random forest.
//
// The tree is a programmable node table (NODES entries of ml_pkg::rf_node_t).
// Classification walks from node 0: at each of MAX_DEPTH levels an inner node
// compares one feature with its threshold (unsigned, "<=" goes left, as in the
// usual CART convention) and moves to its left or right child; a leaf keeps the
// walk where it is. After MAX_DEPTH levels the node reached must be a leaf and
// its class is the tree's vote. A walk that ends on an inner node (a table
// deeper than MAX_DEPTH) votes for the slowest class, which is always safe.
//
// The paper says the trained forest is turned into HDL but gives neither the
// trees nor their encoding. Holding the trees in a loadable table is this
// design's choice: the same hardware runs any trained forest up to NODES nodes
// and MAX_DEPTH levels per tree. Comparing raw operand values is enough even
// though training scaled the features with a quantile transform, because that
// transform is monotonic and every threshold can be mapped back to the raw
// value it stands for before loading.
//
// Interface: a write port (wr_en, wr_addr, wr_node) loads one node per clock.
// Reset marks every node unwritten, and an unwritten node reads as a leaf of
// the slowest class, so an unloaded tree always asks for the worst-case clock.
// A pointer beyond NODES ends the walk on the slowest class as well.
// Timing: cls is combinational from feat and the table (one ML-stage cycle).
module rf_tree
  import ml_pkg::*;
#(
  parameter int unsigned NODES       = 512,  // nodes per tree (<= 2**NODE_AW)
  parameter int unsigned MAX_DEPTH   = 10,   // levels walked
  parameter int unsigned NUM_CLASSES = 4
)(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_en,
  input  logic [NODE_AW-1:0] wr_addr,
  input  rf_node_t           wr_node,
  input  features_t          feat,
  output logic [CLASS_W-1:0] cls
);

  localparam logic [CLASS_W-1:0] SLOWEST = CLASS_W'(NUM_CLASSES - 1);
  localparam int unsigned IW = (NODES > 1) ? $clog2(NODES) : 1;

  // Node storage is a plain memory; a separate valid bit per node, cleared by
  // reset, makes unwritten nodes read as leaves of the slowest class.
  rf_node_t         table_q [NODES];
  logic [NODES-1:0] valid_q;

  always_ff @(posedge clk) begin
    if (wr_en && (32'(wr_addr) < NODES)) table_q[IW'(wr_addr)] <= wr_node;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              valid_q <= '0;
    else if (wr_en && (32'(wr_addr) < NODES)) valid_q[IW'(wr_addr)] <= 1'b1;
  end

  function automatic rf_node_t read_node(logic [NODE_AW-1:0] a);
    rf_node_t n;
    n = '0;
    if (32'(a) >= NODES) begin
      n.leaf = 1'b1;                 // out of range: slowest class
      n.cls  = SLOWEST;
    end else if (!valid_q[IW'(a)]) begin
      n.leaf = 1'b1;
      n.cls  = SLOWEST;
    end else begin
      n = table_q[IW'(a)];
    end
    return n;
  endfunction

  // Level-by-level walk.
  logic [NODE_AW-1:0] cur [MAX_DEPTH+1];
  rf_node_t           nd  [MAX_DEPTH+1];

  always_comb begin
    cur[0] = '0;
    for (int l = 0; l < MAX_DEPTH; l++) begin
      nd[l] = read_node(cur[l]);
      if (nd[l].leaf)
        cur[l+1] = cur[l];
      else if (feature_value(feat, nd[l].fidx) <= nd[l].thresh)
        cur[l+1] = nd[l].left;
      else
        cur[l+1] = nd[l].right;
    end
    nd[MAX_DEPTH] = read_node(cur[MAX_DEPTH]);
    if (nd[MAX_DEPTH].leaf && 32'(nd[MAX_DEPTH].cls) < NUM_CLASSES)
      cls = nd[MAX_DEPTH].cls;
    else
      cls = SLOWEST;
  end

endmodule
