// tb_rjq_cell: self-checking testbench of one reject-queue cell.
//
// The command bus and both neighbours are driven with random values every
// cycle (priorities, deadlines and IDs from small ranges so that equal keys
// occur). A reference copy of the cell's contents is updated with the shift
// rules: on INSERT a cell whose key {crit, level, deadline} is smaller than
// the new one (or that is empty) takes the new process or its right
// neighbour's; on REMOVE at or right of the cell it takes its left
// neighbour's. The combinational outputs (after, rm) are checked before each
// edge, the registered ones after it.
module tb_rjq_cell;
  import red_pkg::*;

  logic     clk = 1'b0;
  logic     rst_n = 1'b0;
  qcmd_t    cmd;
  logic     right_after, right_rm, right_valid, left_valid;
  process_t right_proc, left_proc;
  logic     valid_o, after_o, rm_o;
  process_t proc_o;

  int checks = 0;
  int failures = 0;
  int n_take_new = 0, n_take_right = 0, n_shift_left = 0;

  rjq_cell dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic     m_valid;
  process_t m_proc;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h (t=%0t)", what, got, exp, $time);
    end
  endtask

  function automatic process_t rnd_proc();
    process_t p;
    p.id = pid_t'($urandom_range(7));
    p.deadline = deadline_t'($urandom_range(3));
    p.wcet = wcet_t'($urandom_range(60));
    p.crit = crit_t'($urandom_range(3));
    p.level = 10'($urandom_range(1));
    return p;
  endfunction

  initial begin
    logic e_after, e_rm;
    cmd = '0;
    right_after = 0; right_rm = 0; right_valid = 0; left_valid = 0;
    right_proc = '0; left_proc = '0;
    m_valid = 0; m_proc = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    check("reset valid", valid_o, 1'b0);
    for (int it = 0; it < 40000; it++) begin
      cmd.op      = qop_t'($urandom_range(2));
      cmd.proc    = rnd_proc();
      right_after = $urandom_range(1);
      right_rm    = ($urandom_range(3) == 0);
      right_valid = $urandom_range(1);
      right_proc  = rnd_proc();
      left_valid  = $urandom_range(1);
      left_proc   = rnd_proc();
      #1;
      e_after = !m_valid || ({cmd.proc.crit, cmd.proc.level, cmd.proc.deadline} >
                             {m_proc.crit, m_proc.level, m_proc.deadline});
      e_rm    = right_rm || (m_valid && m_proc.id == cmd.proc.id);
      check("after", after_o, e_after);
      check("rm", rm_o, e_rm);
      if (cmd.op == Q_INSERT && e_after) begin
        if (right_after) begin
          m_valid = right_valid; m_proc = right_proc; n_take_right++;
        end else begin
          m_valid = 1'b1; m_proc = cmd.proc; n_take_new++;
        end
      end else if (cmd.op == Q_REMOVE && e_rm) begin
        m_valid = left_valid; m_proc = left_proc;
        n_shift_left++;
      end
      @(negedge clk);
      check("valid", valid_o, m_valid);
      check("proc", proc_o, m_proc);
    end
    checks++;
    if (n_take_new == 0 || n_take_right == 0 || n_shift_left == 0) begin
      failures++;
      $display("coverage hole");
    end
    $display("take new %0d, take right %0d, shift left %0d",
             n_take_new, n_take_right, n_shift_left);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
