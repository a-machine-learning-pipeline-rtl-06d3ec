// tb_ml_stage -- self-checking test of the ML pipeline stage.
//
// Loads a small random forest, then streams random decoded instructions with
// random bubbles, stalls, flushes and results behind execute. A cycle-level
// model kept here (ID/ML and ML/EX registers, operand and output history,
// forest classification through tb_rf_pkg) predicts the ML/EX register after
// every edge; valid bit, instruction and class are compared. A directed start
// checks the one-cycle latency through the stage, and that instructions
// outside the four classified groups get the slowest class.
module tb_ml_stage;
  import ml_pkg::*;
  import tb_rf_pkg::*;
  localparam int NT = 3, NN = 32, D = 4, NC = 4;

  logic clk = 0, rst_n = 0;
  logic id_valid = 0, stall = 0, flush = 0, res_valid = 0;
  instr_t id_instr = '0;
  logic [31:0] res = 0;
  logic wr_en = 0;
  logic [1:0] wr_tree = 0;
  logic [NODE_AW-1:0] wr_addr = 0;
  rf_node_t wr_node = '0;
  logic ex_valid;
  instr_t ex_instr;
  logic [CLASS_W-1:0] ex_cls;
  int checks = 0, failures = 0;
  int n_stall = 0, n_flush = 0, n_other = 0;

  ml_stage #(.N_TREES(NT), .NODES(NN), .MAX_DEPTH(D), .NUM_CLASSES(NC)) dut (.*);

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

  function automatic instr_t rand_instr();
    instr_t i;
    i.pc   = $urandom & 32'hFFFF_FFFC;
    i.grp  = op_group_e'($urandom_range(0, 4));
    i.op1  = $urandom;
    i.op2  = $urandom;
    i.ctrl = 16'($urandom);
    return i;
  endfunction

  rf_model m;
  // model state
  logic   m_mlv, m_exv;
  instr_t m_ml, m_ex;
  int     m_cls;
  logic [31:0] m_p1, m_p2, m_out;

  function automatic int ref_class(instr_t i);
    features_t f;
    if (i.grp == OP_OTHER) return NC - 1;
    f.itype    = (i.grp == OP_ARITH) ? 4'b1000 : (i.grp == OP_ARITH_IMM) ? 4'b0100 :
                 (i.grp == OP_LOGIC) ? 4'b0010 : 4'b0001;
    f.op1      = i.op1;
    f.op2      = i.op2;
    f.xop1     = i.op1 ^ m_p1;
    f.xop2     = i.op2 ^ m_p2;
    f.prev_out = m_out;
    return m.predict(f);
  endfunction

  int t0;

  initial begin
    m = new(NT, NN, D, NC);
    m.gen_all(15);
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++)
      for (int n = 0; n < NN; n++) begin
        @(negedge clk);
        wr_en = 1; wr_tree = 2'(t); wr_addr = NODE_AW'(n); wr_node = m.flat[t * NN + n];
      end
    @(negedge clk);
    wr_en = 0;

    // directed latency: one OP_OTHER instruction, count edges until it is in EX
    id_instr = rand_instr();
    id_instr.grp = OP_OTHER;
    id_valid = 1;
    t0 = 0;
    @(posedge clk);
    #1 id_valid = 0;
    while (!ex_valid && t0 < 10) begin @(posedge clk); #1 t0++; end
    check(t0 == 1, $sformatf("latency: in EX %0d edge(s) after acceptance", t0 + 1));
    check(ex_instr == id_instr, "latency instr");
    check(int'(ex_cls) == NC - 1, "OP_OTHER gets slowest class");
    @(negedge clk);

    // model starts from the DUT state after the directed part
    m_mlv = 0; m_exv = ex_valid; m_ex = ex_instr; m_cls = int'(ex_cls);
    m_p1 = id_instr.op1; m_p2 = id_instr.op2; m_out = 0;

    for (int i = 0; i < 4000; i++) begin
      logic   n_mlv, n_exv;
      instr_t n_ml, n_ex;
      int     n_cls;
      logic [31:0] n_p1, n_p2, n_out;
      // compare
      check(ex_valid == m_exv, "ex_valid");
      if (m_exv) begin
        check(ex_instr == m_ex, "ex_instr");
        check(int'(ex_cls) == m_cls, $sformatf("ex_cls got %0d exp %0d", ex_cls, m_cls));
      end
      // drive
      id_valid  = $urandom_range(0, 4) != 0;
      id_instr  = rand_instr();
      stall     = $urandom_range(0, 9) == 0;
      flush     = $urandom_range(0, 29) == 0;
      res_valid = $urandom_range(0, 1);
      res       = $urandom;
      n_stall += stall; n_flush += flush; n_other += (id_valid && id_instr.grp == OP_OTHER);
      // next model state
      n_mlv = m_mlv; n_ml = m_ml; n_exv = m_exv; n_ex = m_ex; n_cls = m_cls;
      n_p1 = m_p1; n_p2 = m_p2; n_out = res_valid ? res : m_out;
      if (flush) begin
        n_mlv = 0; n_exv = 0;
      end else if (!stall) begin
        n_exv = m_mlv; n_ex = m_ml; n_cls = ref_class(m_ml);
        n_mlv = id_valid; n_ml = id_instr;
        if (m_mlv) begin n_p1 = m_ml.op1; n_p2 = m_ml.op2; end
      end
      @(posedge clk);
      #1;
      m_mlv = n_mlv; m_ml = n_ml; m_exv = n_exv; m_ex = n_ex; m_cls = n_cls;
      m_p1 = n_p1; m_p2 = n_p2; m_out = n_out;
      @(negedge clk);
    end
    check(n_stall > 0 && n_flush > 0 && n_other > 0, "stall, flush and OP_OTHER exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
