// tb_feature_extract -- self-checking test of the feature builder.
//
// Drives random instruction groups and operands, random `advance` and random
// results, keeps its own copy of the history (previous operands, newest
// result) and checks every feature field each cycle: the one-hot type codes,
// the raw operands, the XOR with the previous operands and the previous
// output. Also checks that reset clears the history.
module tb_feature_extract;
  import ml_pkg::*;

  logic clk = 0, rst_n = 0;
  op_group_e grp;
  logic [31:0] op1, op2, res;
  logic advance, res_valid;
  features_t feat;
  int checks = 0, failures = 0;

  feature_extract dut (.*);

  always #500 clk = ~clk;

  initial begin
    #20000000;
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

  logic [31:0] m_p1, m_p2, m_out;
  logic [3:0] exp_t;

  initial begin
    grp = OP_ARITH; op1 = '1; op2 = '1; res = '1; advance = 0; res_valid = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    check(feat.xop1 == '1 && feat.xop2 == '1 && feat.prev_out == 0, "reset history");
    m_p1 = 0; m_p2 = 0; m_out = 0;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      grp       = op_group_e'($urandom_range(0, 4));
      op1       = $urandom;
      op2       = (i % 7 == 0) ? m_p2 : $urandom;
      advance   = $urandom_range(0, 3) != 0;
      res_valid = $urandom_range(0, 1);
      res       = $urandom;
      #1;
      case (grp)
        OP_ARITH:     exp_t = 4'b1000;
        OP_ARITH_IMM: exp_t = 4'b0100;
        OP_LOGIC:     exp_t = 4'b0010;
        OP_MULDIV:    exp_t = 4'b0001;
        default:      exp_t = 4'b0000;
      endcase
      check(feat.itype == exp_t, "one-hot type");
      check(feat.op1 == op1 && feat.op2 == op2, "operands");
      check(feat.xop1 == (op1 ^ m_p1), "xop1");
      check(feat.xop2 == (op2 ^ m_p2), "xop2");
      check(feat.prev_out == m_out, "prev_out");
      @(posedge clk);
      if (advance) begin m_p1 = op1; m_p2 = op2; end
      if (res_valid) m_out = res;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
