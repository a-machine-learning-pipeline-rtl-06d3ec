// tb_replay_ctrl -- self-checking test of clock-class selection and replay.
//
// Drives random ML/EX contents, stalls and timing-error pulses. Checks each
// cycle that flush and redirect follow err, that the redirect PC is the PC of
// the instruction launched at the previous edge, that bubbles get class 0,
// that normal instructions get their own class, and that exactly the first
// instruction launched after an error runs with the slowest class.
module tb_replay_ctrl;
  import ml_pkg::*;
  localparam int NC = 4;

  logic clk = 0, rst_n = 0;
  logic ex_valid = 0, stall = 0, err = 0;
  logic [31:0] ex_pc = 0;
  logic [CLASS_W-1:0] ex_cls = 0;
  logic flush, redirect_valid, replay_slow;
  logic [31:0] redirect_pc;
  logic [CLASS_W-1:0] clk_cls;
  int checks = 0, failures = 0, n_replay = 0, n_slow = 0;

  replay_ctrl #(.NUM_CLASSES(NC)) dut (.*);

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

  logic [31:0] m_cap;
  bit m_pend;
  int exp_cls;

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    m_cap = 0; m_pend = 0;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      ex_valid = $urandom_range(0, 3) != 0;
      ex_pc    = $urandom & 32'hFFFF_FFFC;
      ex_cls   = CLASS_W'($urandom_range(0, NC - 1));
      stall    = $urandom_range(0, 7) == 0;
      err      = $urandom_range(0, 9) == 0;
      #1;
      exp_cls = !ex_valid ? 0 : m_pend ? NC - 1 : int'(ex_cls);
      check(flush == err && redirect_valid == err, "flush/redirect follow err");
      check(redirect_pc == m_cap, "redirect pc is last launched pc");
      check(int'(clk_cls) == exp_cls, $sformatf("clk_cls got %0d exp %0d", clk_cls, exp_cls));
      check(replay_slow == (m_pend && ex_valid), "replay_slow");
      if (err) n_replay++;
      if (m_pend && ex_valid) n_slow++;
      // model update at the coming edge
      if (ex_valid && !stall) m_cap = ex_pc;
      if (err) m_pend = 1;
      else if (ex_valid && !stall && m_pend) m_pend = 0;
    end
    check(n_replay > 0 && n_slow > 0, "replays and worst-case re-executions seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
