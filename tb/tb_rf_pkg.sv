// tb_rf_pkg -- testbench helpers: random forests and a software reference.
//
// rf_model holds a forest as a flat array (tree t, node n at t*nodes+n) in
// the same node format the hardware tables use, builds random trees of a
// given depth, and classifies a feature vector by walking each tree and
// taking a majority vote (ties go to the slower class). The walk and the vote
// are written independently of the RTL so that testbenches can compare
// against them. Time unit of all testbenches is the simulator default, 1 ps.
package tb_rf_pkg;
  import ml_pkg::*;

  // Feature value by index, written out independently of ml_pkg::feature_value.
  function automatic logic [31:0] tb_fval(features_t f, int idx);
    case (idx)
      0: return {31'd0, f.itype[3]};
      1: return {31'd0, f.itype[2]};
      2: return {31'd0, f.itype[1]};
      3: return {31'd0, f.itype[0]};
      4: return f.op1;
      5: return f.op2;
      6: return f.xop1;
      7: return f.xop2;
      8: return f.prev_out;
      default: return 32'd0;
    endcase
  endfunction

  function automatic features_t rand_features();
    features_t f;
    int g = int'($urandom_range(0, 4));
    f.itype    = (g == 4) ? 4'b0000 : (4'b1000 >> g);
    f.op1      = $urandom;
    f.op2      = $urandom;
    f.xop1     = $urandom;
    f.xop2     = $urandom;
    f.prev_out = $urandom;
    return f;
  endfunction

  class rf_model;
    int ntrees, nodes, depth, ncls;
    rf_node_t flat[];
    int used[];      // nodes used per tree

    function new(int nt, int nn, int d, int nc);
      ntrees = nt; nodes = nn; depth = d; ncls = nc;
      flat = new[nt * nn];
      used = new[nt];
      for (int i = 0; i < nt * nn; i++) begin
        flat[i] = '0;
        flat[i].leaf = 1'b1;
        flat[i].cls  = CLASS_W'(nc - 1);
      end
    endfunction

    // Random tree t: breadth-first, each node below the depth limit becomes
    // an inner node unless the dice (leaf_pct) or the node budget say leaf.
    function void gen_tree(int t, int leaf_pct);
      int qi[$];
      int ql[$];
      int next_free = 1;
      qi.push_back(0); ql.push_back(0);
      while (qi.size() > 0) begin
        int idx = qi.pop_front();
        int lvl = ql.pop_front();
        rf_node_t n = '0;
        if (lvl >= depth || next_free + 2 > nodes ||
            (lvl > 0 && int'($urandom_range(0, 99)) < leaf_pct)) begin
          n.leaf = 1'b1;
          n.cls  = CLASS_W'($urandom_range(0, ncls - 1));
        end else begin
          int fi = int'($urandom_range(0, 8));
          n.leaf   = 1'b0;
          n.fidx   = 4'(fi);
          n.thresh = (fi < 4) ? 32'd0 : $urandom;
          n.left   = NODE_AW'(next_free);
          n.right  = NODE_AW'(next_free + 1);
          qi.push_back(next_free);     ql.push_back(lvl + 1);
          qi.push_back(next_free + 1); ql.push_back(lvl + 1);
          next_free += 2;
        end
        flat[t * nodes + idx] = n;
      end
      used[t] = next_free;
    endfunction

    function void gen_all(int leaf_pct);
      for (int t = 0; t < ntrees; t++) gen_tree(t, leaf_pct);
    endfunction

    function int walk(int t, features_t f);
      int idx = 0;
      for (int lvl = 0; ; lvl++) begin
        rf_node_t n = flat[t * nodes + idx];
        if (n.leaf) return (int'(n.cls) < ncls) ? int'(n.cls) : ncls - 1;
        if (lvl == depth) return ncls - 1;
        idx = (tb_fval(f, int'(n.fidx)) <= n.thresh) ? int'(n.left) : int'(n.right);
      end
    endfunction

    function int predict(features_t f);
      int cnt[4] = '{0, 0, 0, 0};
      int best = -1;
      int bc = 0;
      for (int t = 0; t < ntrees; t++) cnt[walk(t, f)]++;
      for (int c = ncls - 1; c >= 0; c--)
        if (cnt[c] > best) begin best = cnt[c]; bc = c; end
      return bc;
    endfunction
  endclass

endpackage
