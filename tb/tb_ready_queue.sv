// tb_ready_queue: self-checking testbench of the ready queue.
//
// Drives random INSERT and REMOVE commands into an 8-cell queue and compares,
// after every command, the head (PROCESS_TO_RUN), the full flag, the
// overload bit and the chosen victim with a reference model kept as a
// sorted array: the accumulated execution times are recomputed from scratch
// as prefix sums of the WCETs, independently of the queue's registers.
// The one-cycle command latency is checked by comparing right after the edge
// that applied the command.
module tb_ready_queue;
  import red_pkg::*;

  localparam int unsigned N = 8;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  qcmd_t      cmd;
  rdq_to_cu_t status;
  run_t       run;

  int checks = 0;
  int failures = 0;
  int n_ovl = 0, n_full = 0;

  ready_queue #(.N(N)) dut (.clk, .rst_n, .cmd, .status, .run);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference model: sorted by deadline, arrival order among equal deadlines
  process_t m [$];
  logic [63:0] used;

  task automatic m_insert(process_t p);
    int pos = m.size();
    for (int i = 0; i < m.size(); i++)
      if (p.deadline < m[i].deadline) begin pos = i; break; end
    m.insert(pos, p);
    if (m.size() > N) m = m[0:N-1];
  endtask

  task automatic m_remove(pid_t id);
    for (int i = 0; i < m.size(); i++)
      if (m[i].id == id) begin m.delete(i); break; end
  endtask

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h", what, got, exp);
    end
  endtask

  task automatic compare();
    longint sum = 0;
    int first = -1;
    int vict = -1;
    for (int i = 0; i < m.size(); i++) begin
      sum += m[i].wcet;
      if (first < 0 && sum > m[i].deadline) first = i;
    end
    if (first >= 0)
      for (int i = 0; i <= first; i++)
        if (vict < 0 || prio_of(m[i]) <= prio_of(m[vict])) vict = i;
    check("run.valid", run.valid, m.size() > 0);
    if (m.size() > 0) check("run.id", run.id, m[0].id);
    check("full", status.full, m.size() == N);
    check("overload", status.overload, first >= 0);
    check("victim_valid", status.victim_valid, first >= 0);
    if (first >= 0) check("victim", status.victim, m[vict]);
    if (first >= 0) n_ovl++;
    if (m.size() == N) n_full++;
  endtask

  initial begin
    process_t p;
    cmd  = '0;
    used = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare();
    for (int it = 0; it < 20000; it++) begin
      cmd = '0;
      if ($urandom_range(99) < 55) begin
        // insert a process with a fresh ID
        do p.id = pid_t'($urandom_range(63)); while (used[p.id] && used != '1);
        p.deadline = deadline_t'($urandom_range(300));
        p.wcet     = wcet_t'($urandom_range(60, 1));
        p.crit     = crit_t'($urandom_range(3));
        p.level    = 10'($urandom_range(3));
        if (!used[p.id]) begin
          cmd = '{op: Q_INSERT, proc: p};
          used[p.id] = 1'b1;
          // a process lost at the end of a full queue frees its ID
          if (m.size() == N) begin
            int pos;
            pos = m.size();
            for (int i = 0; i < m.size(); i++)
              if (p.deadline < m[i].deadline) begin pos = i; break; end
            if (pos < N) used[m[N-1].id] = 1'b0; else used[p.id] = 1'b0;
          end
          m_insert(p);
        end
      end else begin
        p = '0;
        if (m.size() > 0 && $urandom_range(9) != 0)
          p.id = m[$urandom_range(m.size()-1)].id;
        else
          p.id = pid_t'($urandom_range(63));
        p.deadline = deadline_t'($urandom);    // fields other than the ID are ignored
        cmd = '{op: Q_REMOVE, proc: p};
        if (used[p.id]) begin
          used[p.id] = 1'b0;
          m_remove(p.id);
        end
      end
      @(negedge clk);
      cmd = '0;
      compare();
      if ($urandom_range(200) == 0) begin   // occasionally drain everything
        while (m.size() > 0) begin
          cmd = '{op: Q_REMOVE, proc: m[0]};
          used[m[0].id] = 1'b0;
          m_remove(m[0].id);
          @(negedge clk);
          cmd = '0;
          compare();
        end
      end
    end
    checks++;
    if (n_ovl == 0 || n_full == 0) begin
      failures++;
      $display("coverage: overload %0d full %0d", n_ovl, n_full);
    end
    $display("overload seen %0d times, full %0d times", n_ovl, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
