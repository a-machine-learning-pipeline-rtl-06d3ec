// tb_ml_pipeline_top -- end-to-end test of the delay-classifying stage with
// adaptive clock, double sampling and replay, at the default sizes
// (10 trees x 512 nodes, depth 10, four delay classes).
//
// Around the design under test this bench models what belongs to the baseline
// core and the clock manager:
//   * a fetch/decode front end that walks a random program of NPROG
//     instructions (one million, the length of the synthetic benchmark the
//     design was evaluated with), obeys stall, flush and redirect, and tags every fetch with
//     a unique number in the control field;
//   * an execution unit whose output shows a wrong value 0.6 ns after launch
//     and the right value after the instruction's true delay. The true delay
//     class is the class the stage chose, one class slower for about 15% of
//     instructions (these must be caught and replayed) or one class faster for
//     about 15% (time is wasted but the result is right). Delays are 0.9 ns
//     for class 0 and 0.3 ns above the next-lower class period otherwise, so a
//     one-class miss settles inside the 0.5 ns guard time;
//   * adaptive_clock_model, which sets each period from the requested class;
//   * random stalls from the core.
// Checks: every instruction commits exactly once, in program order, with the
// right result; the class of every first execution equals the reference
// forest's prediction from independently tracked features; a replayed
// instruction runs with the slowest class and commits five edges after its
// failed attempt (when no stall intervenes). Each mechanism -- every delay
// class, a replay, a worst-case re-execution, an over-cautious class, a
// stall, an unclassified instruction group, a bubble -- must occur.
module tb_ml_pipeline_top;
  import ml_pkg::*;
  import tb_rf_pkg::*;

  localparam int NC = 4, NT = 10, NN = 512, D = 10;
  localparam int NPROG = 1000000;
  localparam int TCD = 600;

  logic clk, clk_shadow, rst_n = 0, en = 0;
  logic id_valid = 0, stall = 0, core_flush = 0;
  instr_t id_instr = '0;
  logic ex_valid;
  instr_t ex_instr;
  logic [31:0] ex_result = 0;
  logic mem_valid;
  logic [31:0] mem_result, mem_pc;
  logic front_flush, redirect_valid;
  logic [31:0] redirect_pc;
  logic [CLASS_W-1:0] clk_cls;
  logic replay_slow;
  logic wr_en = 0;
  logic [3:0] wr_tree = 0;
  logic [NODE_AW-1:0] wr_addr = 0;
  rf_node_t wr_node = '0;
  longint unsigned cycles, busy_ps;

  ml_pipeline_top dut (.*);

  adaptive_clock_model #(.NUM_CLASSES(NC), .GUARD_PS(500)) u_clk (
    .en, .cls(clk_cls), .clk, .clk_shadow, .cycles, .busy_ps
  );

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 15) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    #(longint'(NPROG) * 40000 + 200000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- program
  instr_t prog [NPROG];
  rf_model m;

  function automatic logic [31:0] alu(instr_t i);
    case (i.grp)
      OP_ARITH, OP_ARITH_IMM: return i.op1 + i.op2;
      OP_LOGIC:               return i.op1 ^ i.op2;
      OP_MULDIV:              return i.op1 * i.op2;
      default:                return i.op1 - i.op2;
    endcase
  endfunction

  function automatic int delay_ps(int k);
    return (k == 0) ? class_period_ps(NC, 0) - 100 : class_period_ps(NC, k - 1) + 300;
  endfunction

  // ---------------------------------------------------------------- front end
  logic [31:0] fetch_pc = 0;
  logic [15:0] seq = 1;
  bit running = 0;

  always @(posedge clk) if (running) begin
    stall <= ($urandom_range(0, 19) == 0);
    if (front_flush) begin
      id_valid <= 0;
      if (redirect_valid) fetch_pc <= redirect_pc;
    end else if (!stall) begin
      if (fetch_pc / 4 < NPROG) begin
        automatic instr_t i = prog[fetch_pc / 4];
        i.ctrl = seq;
        seq <= seq + 1;
        id_valid <= 1;
        id_instr <= i;
        fetch_pc <= fetch_pc + 4;
      end else begin
        id_valid <= 0;
      end
    end
  end

  // ---------------------------------------------------------------- EX model
  int unsigned launch_seq = 0, last_fired = 0;
  logic [15:0] last_ctrl = 0;
  int n_cls [NC];
  int n_replay = 0, n_reexec = 0, n_overcautious = 0, n_stall = 0, n_other = 0;
  int n_bubble = 0, n_classchk = 0, n_penalty_chk = 0;

  // reference history, tracked independently of the design
  logic [31:0] h_p1 = 0, h_p2 = 0, h_out = 0, h_out_for_ml = 0;

  task automatic drive_result(logic [31:0] v, int at, int unsigned me);
    fork
      begin
        #(at);
        if (last_fired <= me) begin ex_result = v; last_fired = me; end
      end
    join_none
  endtask

  always @(posedge clk) if (running) begin
    // history as the ML stage saw it during the cycle that just ended
    h_out_for_ml = h_out;
    if (mem_valid) h_out = mem_result;
    #1;
    if (!ex_valid) n_bubble++;
    if (ex_valid && ex_instr.ctrl != last_ctrl) begin : launch
      automatic instr_t i = ex_instr;
      automatic int pred = int'(clk_cls);
      automatic int k = pred;
      automatic int r = int'($urandom_range(0, 99));
      automatic int unsigned me;
      last_ctrl = i.ctrl;
      n_cls[pred]++;
      if (i.grp == OP_OTHER) n_other++;
      if (replay_slow) begin
        n_reexec++;
        check(pred == NC - 1, "re-execution runs with the slowest class");
      end else begin
        automatic features_t f;
        automatic int ref_c;
        f.itype = onehot_type(i.grp);
        f.op1 = i.op1; f.op2 = i.op2;
        f.xop1 = i.op1 ^ h_p1; f.xop2 = i.op2 ^ h_p2;
        f.prev_out = h_out_for_ml;
        ref_c = (i.grp == OP_OTHER) ? NC - 1 : m.predict(f);
        n_classchk++;
        check(pred == ref_c, $sformatf("class of pc %0h got %0d exp %0d", i.pc, pred, ref_c));
        if (r < 15 && pred < NC - 1) k = pred + 1;
        else if (r >= 85 && pred > 0) begin k = pred - 1; n_overcautious++; end
      end
      h_p1 = i.op1; h_p2 = i.op2;
      launch_seq++;
      me = launch_seq;
      if (delay_ps(k) > TCD) drive_result(alu(i) ^ 32'h5A5A_A5A5, TCD - 1, me);
      drive_result(alu(i), delay_ps(k) - 1, me);
    end
  end

  // ---------------------------------------------------------------- commit checker
  int next_commit = 0;
  longint cyc = 0;
  longint err_cyc = -1;
  logic [31:0] err_pc;
  bit stall_in_window = 0;

  always @(posedge clk) if (running) begin
    cyc++;
    if (stall) begin n_stall++; stall_in_window = 1; end
    if (redirect_valid) begin
      n_replay++;
      err_cyc = cyc; err_pc = redirect_pc; stall_in_window = stall;
    end
    if (mem_valid) begin
      automatic int idx = int'(mem_pc / 4);
      check(idx == next_commit, $sformatf("commit order: pc %0h expected index %0d", mem_pc, next_commit));
      if (idx < NPROG)
        check(mem_result == alu(prog[idx]), $sformatf("result of pc %0h", mem_pc));
      if (err_cyc >= 0 && mem_pc == err_pc) begin
        if (!stall_in_window) begin
          n_penalty_chk++;
          check(cyc - err_cyc == 5, $sformatf("replay commit %0d edges after error", cyc - err_cyc));
        end
        err_cyc = -1;
      end
      next_commit++;
    end
  end

  // ---------------------------------------------------------------- sequence
  longint unsigned c0, b0;

  initial begin
    foreach (n_cls[c]) n_cls[c] = 0;
    for (int i = 0; i < NPROG; i++) begin
      automatic int g = int'($urandom_range(0, 9));
      prog[i].pc   = 32'(i * 4);
      prog[i].grp  = (g == 9) ? OP_OTHER : op_group_e'(g % 4);
      prog[i].op1  = $urandom;
      prog[i].op2  = (g % 3 == 0) ? 32'($urandom_range(0, 65535)) : $urandom;
      prog[i].ctrl = 0;
    end
    m = new(NT, NN, D, NC);
    m.gen_all(30);
    en = 1;
    repeat (3) @(posedge clk);
    #10 rst_n = 1;
    for (int t = 0; t < NT; t++)
      for (int n = 0; n < NN; n++) begin
        @(negedge clk);
        wr_en = 1; wr_tree = 4'(t); wr_addr = NODE_AW'(n); wr_node = m.flat[t * NN + n];
      end
    @(negedge clk);
    wr_en = 0;
    @(posedge clk);
    c0 = cycles; b0 = busy_ps;
    running = 1;
    while (next_commit < NPROG) @(posedge clk);
    running = 0;
    check(next_commit == NPROG, "all instructions committed");
    foreach (n_cls[c]) check(n_cls[c] > 0, $sformatf("delay class %0d used", c));
    check(n_replay > 0, "replay happened");
    check(n_reexec > 0, "worst-case re-execution happened");
    check(n_overcautious > 0, "over-cautious class happened");
    check(n_stall > 0, "stall happened");
    check(n_other > 0, "unclassified group happened");
    check(n_bubble > 0, "bubble happened");
    check(n_penalty_chk > 0, "replay penalty measured");
    check(n_classchk > NPROG / 2, "class checked for most instructions");
    check(busy_ps - b0 < (cycles - c0) * longint'(T_WORST_PS), "faster than worst-case clocking");
    $display("instructions %0d cycles %0d time %0d ps, worst-case clock would need %0d ps",
             NPROG, cycles - c0, busy_ps - b0, (cycles - c0) * T_WORST_PS);
    $display("classes %p replays %0d re-executions %0d over-cautious %0d stalls %0d",
             n_cls, n_replay, n_reexec, n_overcautious, n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
