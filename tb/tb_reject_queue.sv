// tb_reject_queue: self-checking testbench of the reject queue.
//
// Drives random INSERT, head-pop and REMOVE-by-ID commands into an 8-cell
// queue and compares the head, head_valid and full flag after every command
// with a reference model kept as an array sorted by {criticality, level,
// deadline}, largest first, equal keys in arrival order. Small value ranges
// make equal priorities and equal keys frequent.
module tb_reject_queue;
  import red_pkg::*;

  localparam int unsigned N = 8;

  logic       clk = 1'b0;
  logic       rst_n = 1'b0;
  qcmd_t      cmd;
  rjq_to_cu_t status;

  int checks = 0;
  int failures = 0;
  int n_full = 0, n_pop = 0, n_kill = 0;

  reject_queue #(.N(N)) dut (.clk, .rst_n, .cmd, .status);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  process_t m [$];
  logic [63:0] used;

  function automatic logic [PRIO_W+DEADLINE_W-1:0] key(process_t p);
    return {p.crit, p.level, p.deadline};
  endfunction

  // returns the process that fell off the end, if any
  task automatic m_insert(process_t p, output logic lost, output pid_t lost_id);
    int pos;
    pos = m.size();
    for (int i = 0; i < m.size(); i++)
      if (key(p) > key(m[i])) begin pos = i; break; end
    m.insert(pos, p);
    lost = 1'b0;
    lost_id = '0;
    if (m.size() > N) begin
      lost = 1'b1;
      lost_id = m[N].id;
      m = m[0:N-1];
    end
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
    check("head_valid", status.head_valid, m.size() > 0);
    if (m.size() > 0) check("head", status.head, m[0]);
    check("full", status.full, m.size() == N);
    if (m.size() == N) n_full++;
  endtask

  initial begin
    process_t p;
    logic     lost;
    pid_t     lost_id;
    int       r;
    cmd  = '0;
    used = '0;
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    @(negedge clk);
    compare();
    for (int it = 0; it < 20000; it++) begin
      r = $urandom_range(99);
      if (r < 55) begin
        do p.id = pid_t'($urandom_range(63)); while (used[p.id]);
        p.deadline = deadline_t'($urandom_range(8));
        p.wcet     = wcet_t'($urandom);
        p.crit     = crit_t'($urandom_range(3));
        p.level    = 10'($urandom_range(2));
        cmd = '{op: Q_INSERT, proc: p};
        used[p.id] = 1'b1;
        m_insert(p, lost, lost_id);
        if (lost) used[lost_id] = 1'b0;
      end else if (r < 80 && m.size() > 0) begin
        cmd = '{op: Q_REMOVE, proc: status.head};   // pop the head
        used[m[0].id] = 1'b0;
        m.delete(0);
        n_pop++;
      end else begin
        p = '0;
        p.id = pid_t'($urandom_range(63));
        if (m.size() > 0 && $urandom_range(3) != 0) p.id = m[$urandom_range(m.size()-1)].id;
        p.crit = crit_t'($urandom);
        cmd = '{op: Q_REMOVE, proc: p};
        if (used[p.id]) n_kill++;
        used[p.id] = 1'b0;
        m_remove(p.id);
      end
      @(negedge clk);
      cmd = '0;
      compare();
    end
    checks++;
    if (n_full == 0 || n_pop == 0 || n_kill == 0) begin
      failures++;
      $display("coverage hole");
    end
    $display("full %0d, pops %0d, kills %0d", n_full, n_pop, n_kill);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
