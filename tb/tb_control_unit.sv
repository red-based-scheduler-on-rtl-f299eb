// tb_control_unit: self-checking testbench of the control unit.
//
// The queue status buses are driven directly. A short directed sequence walks
// through each decision (insert, insert into a full ready queue, kill,
// rejection, blocking, reclaim, successful reclaim, undone reclaim), then a
// long random run compares both command buses every cycle with a reference
// written from the rules: instruction first, then overload (undo the
// previous-cycle reclaim, else reject the victim), then reclaim of the
// reject-queue head unless the ready queue is full or reclaiming is blocked
// (blocked by a rejection or undo, released by a kill). CPU instructions
// are never issued in two consecutive cycles.
module tb_control_unit;
  import red_pkg::*;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  instr_t     instr;
  rdq_to_cu_t rdq;
  rjq_to_cu_t rjq;
  qcmd_t      to_rdq, to_rjq;

  int checks = 0;
  int failures = 0;
  int n_act [7];

  control_unit dut (.clk, .rst_n, .instr, .rdq, .rjq, .to_rdq, .to_rjq);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference state
  logic     r_pending, r_blocked;
  process_t r_reclaimed;

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h (t=%0t)", what, got, exp, $time);
    end
  endtask

  function automatic process_t rnd_proc();
    process_t p;
    p.id = pid_t'($urandom);
    p.deadline = deadline_t'($urandom);
    p.wcet = wcet_t'($urandom);
    p.crit = crit_t'($urandom_range(3));
    p.level = 10'($urandom);
    return p;
  endfunction

  // Compute expected commands, compare, then advance the reference state.
  // Called at the negedge, with the inputs of the coming rising edge set.
  task automatic step();
    qcmd_t e_rdq, e_rjq;
    int    act;
    e_rdq = '0;
    e_rjq = '0;
    act = 0;
    if (instr.op == INSTR_INSERT && rdq.full) begin
      e_rjq = '{op: Q_INSERT, proc: instr.proc}; act = 1;
    end else if (instr.op == INSTR_INSERT) begin
      e_rdq = '{op: Q_INSERT, proc: instr.proc}; act = 2;
    end else if (instr.op == INSTR_KILL) begin
      e_rdq = '{op: Q_REMOVE, proc: instr.proc};
      e_rjq = '{op: Q_REMOVE, proc: instr.proc}; act = 3;
    end else if (rdq.overload && r_pending) begin
      e_rdq = '{op: Q_REMOVE, proc: r_reclaimed};
      e_rjq = '{op: Q_INSERT, proc: r_reclaimed}; act = 4;
    end else if (rdq.overload && rdq.victim_valid) begin
      e_rdq = '{op: Q_REMOVE, proc: rdq.victim};
      e_rjq = '{op: Q_INSERT, proc: rdq.victim}; act = 5;
    end else if (!rdq.overload && !r_blocked && rjq.head_valid && !rdq.full) begin
      e_rdq = '{op: Q_INSERT, proc: rjq.head};
      e_rjq = '{op: Q_REMOVE, proc: rjq.head}; act = 6;
    end
    check("to_rdq.op", to_rdq.op, e_rdq.op);
    check("to_rjq.op", to_rjq.op, e_rjq.op);
    if (e_rdq.op != Q_NOP) check("to_rdq.proc", to_rdq.proc, e_rdq.proc);
    if (e_rjq.op != Q_NOP) check("to_rjq.proc", to_rjq.proc, e_rjq.proc);
    n_act[act]++;
    r_pending = (act == 6);
    if (act == 6) r_reclaimed = rjq.head;
    if (act == 3) r_blocked = 1'b0;
    else if (act == 4 || act == 5) r_blocked = 1'b1;
  endtask

  task automatic idle_status();
    rdq = '0;
    rjq = '0;
  endtask

  initial begin
    process_t a, b, v;
    instr = '0;
    idle_status();
    r_pending = 1'b0;
    r_blocked = 1'b0;
    r_reclaimed = '0;
    foreach (n_act[i]) n_act[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    // directed: insert
    a = rnd_proc(); b = rnd_proc(); v = rnd_proc();
    instr = '{op: INSTR_INSERT, proc: a};
    #1 check("insert->rdq", to_rdq, qcmd_t'{op: Q_INSERT, proc: a});
    check("insert rjq idle", to_rjq.op, Q_NOP);
    step(); @(negedge clk);
    // overload -> reject victim, even though an instruction would win
    instr = '0;
    rdq.overload = 1'b1; rdq.victim_valid = 1'b1; rdq.victim = v;
    rjq.head_valid = 1'b1; rjq.head = b;
    #1 check("reject rdq", to_rdq, qcmd_t'{op: Q_REMOVE, proc: v});
    check("reject rjq", to_rjq, qcmd_t'{op: Q_INSERT, proc: v});
    step(); @(negedge clk);
    // blocked: no reclaim although head valid and no overload
    rdq.overload = 1'b0; rdq.victim_valid = 1'b0;
    #1 check("blocked", {to_rdq.op, to_rjq.op}, {Q_NOP, Q_NOP});
    step(); @(negedge clk);
    // kill releases the block
    instr = '{op: INSTR_KILL, proc: a};
    #1 check("kill rdq", to_rdq, qcmd_t'{op: Q_REMOVE, proc: a});
    check("kill rjq", to_rjq, qcmd_t'{op: Q_REMOVE, proc: a});
    step(); @(negedge clk);
    instr = '0;
    #1 check("reclaim rdq", to_rdq, qcmd_t'{op: Q_INSERT, proc: b});
    check("reclaim rjq", to_rjq, qcmd_t'{op: Q_REMOVE, proc: b});
    step(); @(negedge clk);
    // overload after the reclaim: undo moves b back, not the victim v
    rdq.overload = 1'b1; rdq.victim_valid = 1'b1; rdq.victim = v;
    rjq.head = a;
    #1 check("undo rdq", to_rdq, qcmd_t'{op: Q_REMOVE, proc: b});
    check("undo rjq", to_rjq, qcmd_t'{op: Q_INSERT, proc: b});
    step(); @(negedge clk);
    // instruction has precedence over an overload; full ready queue
    rdq.full = 1'b1;
    instr = '{op: INSTR_INSERT, proc: a};
    #1 check("insert full rjq", to_rjq, qcmd_t'{op: Q_INSERT, proc: a});
    check("insert full rdq", to_rdq.op, Q_NOP);
    step(); @(negedge clk);
    instr = '0;
    rdq.overload = 1'b0;
    #1 check("no reclaim when full", {to_rdq.op, to_rjq.op}, {Q_NOP, Q_NOP});
    step(); @(negedge clk);

    // random run
    for (int it = 0; it < 30000; it++) begin
      if (instr.op == INSTR_NOP && $urandom_range(2) == 0)
        instr = '{op: instr_op_t'($urandom_range(2, 1)), proc: rnd_proc()};
      else
        instr = '0;
      rdq.full = ($urandom_range(7) == 0);
      rdq.overload = ($urandom_range(2) == 0);
      rdq.victim_valid = rdq.overload && ($urandom_range(9) != 0);
      rdq.victim = rnd_proc();
      rjq.head_valid = ($urandom_range(3) != 0);
      rjq.head = rnd_proc();
      rjq.full = ($urandom_range(7) == 0);
      #1 step();
      @(negedge clk);
    end
    for (int i = 1; i < 7; i++) begin
      checks++;
      if (n_act[i] == 0) begin
        failures++;
        $display("action %0d never happened", i);
      end
    end
    $display("actions idle/insRJQ/ins/kill/undo/reject/reclaim: %0d %0d %0d %0d %0d %0d %0d",
             n_act[0], n_act[1], n_act[2], n_act[3], n_act[4], n_act[5], n_act[6]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
