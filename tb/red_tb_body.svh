// red_tb_body.svh: end-to-end test body shared by the scheduler testbenches.
//
// Included inside a testbench module that declares:
//   localparam int unsigned N          queue depth of the instance under test
//   localparam int          NUM_INSTR  number of CPU instructions to issue
//   localparam int unsigned ID_RANGE   IDs are drawn from 0..ID_RANGE-1
//   localparam bit          EXPECT_FULL whether the queues can fill up
//   localparam int          ITERATIONS  runs, each starting from reset
//   localparam bit          PAPER_MIX   1: inserts and kills 50 % each;
//                                       0: inserts favoured while few exist
// and instantiates red_scheduler as `dut` on clk, rst_n, instr,
// process_to_run. It sets `done` when finished; the including module
// prints the result line and runs the watchdog.
//
// The stimulus mimics a CPU: instructions insert a process with a free ID
// or kill a process (mostly one that exists), and each is followed by one
// to three idle cycles. Every run ends by killing all processes. A reference model of the whole
// scheduler, kept as plain sorted arrays with execution times recomputed as
// prefix sums, runs the same rules cycle by cycle. PROCESS_TO_RUN, the
// overload bit and the reject-queue head are compared after every clock
// edge. The number of times each mechanism happens is counted, and a
// mechanism that never happens counts as a failure.

  logic   clk = 1'b0;
  logic   rst_n = 1'b0;
  instr_t instr;
  run_t   process_to_run;

  int checks = 0;
  int failures = 0;

  always #5 clk = ~clk;

  logic done = 1'b0;      // set when the stimulus has ended

  // ---------------- reference model ----------------
  process_t m_rdq [$];
  process_t m_rjq [$];
  logic     m_pending, m_blocked;
  process_t m_reclaimed;
  logic [(1<<ID_W)-1:0] used;

  typedef enum int {
    EV_INSERT, EV_INSERT_FULL, EV_KILL, EV_REJECT, EV_RECLAIM_OK,
    EV_UNDO, EV_RJQ_DROP, EV_TWO_CYCLE, EV_LONGER, EV_NUM
  } event_t;
  int n_ev [EV_NUM];
  string ev_name [EV_NUM] = '{"insert", "insert while ready queue full",
    "kill", "rejection", "successful reclaim", "undone reclaim",
    "reject queue overflow", "operation settled in 2 cycles",
    "operation needing extra rejections"};

  function automatic logic [PRIO_W+DEADLINE_W-1:0] rkey(process_t p);
    return {p.crit, p.level, p.deadline};
  endfunction

  task automatic rdq_ins(process_t p);
    int pos;
    pos = m_rdq.size();
    for (int i = 0; i < m_rdq.size(); i++)
      if (p.deadline < m_rdq[i].deadline) begin pos = i; break; end
    m_rdq.insert(pos, p);
  endtask

  task automatic rjq_ins(process_t p);
    int pos;
    pos = m_rjq.size();
    for (int i = 0; i < m_rjq.size(); i++)
      if (rkey(p) > rkey(m_rjq[i])) begin pos = i; break; end
    m_rjq.insert(pos, p);
    if (m_rjq.size() > N) begin
      used[m_rjq[N].id] = 1'b0;
      m_rjq = m_rjq[0:N-1];
      n_ev[EV_RJQ_DROP]++;
    end
  endtask

  task automatic del(ref process_t q [$], input pid_t id);
    for (int i = 0; i < q.size(); i++)
      if (q[i].id == id) begin q.delete(i); break; end
  endtask

  // overload state and victim of the model's ready queue
  task automatic analyse(output logic ovl, output process_t victim);
    longint sum;
    int first, v;
    sum = 0; first = -1; v = -1;
    for (int i = 0; i < m_rdq.size(); i++) begin
      sum += m_rdq[i].wcet;
      if (first < 0 && sum > m_rdq[i].deadline) first = i;
    end
    for (int i = 0; i <= first; i++)
      if (v < 0 || prio_of(m_rdq[i]) <= prio_of(m_rdq[v])) v = i;
    ovl = (first >= 0);
    victim = ovl ? m_rdq[v] : '0;
  endtask

  // one clock edge of the model, with the instruction the DUT samples
  task automatic model_edge(instr_t in);
    logic     ovl;
    process_t victim;
    logic     was_pending;
    analyse(ovl, victim);
    was_pending = m_pending;
    m_pending = 1'b0;
    if (in.op == INSTR_INSERT) begin
      if (m_rdq.size() == N) begin rjq_ins(in.proc); n_ev[EV_INSERT_FULL]++; end
      else begin rdq_ins(in.proc); n_ev[EV_INSERT]++; end
    end else if (in.op == INSTR_KILL) begin
      del(m_rdq, in.proc.id);
      del(m_rjq, in.proc.id);
      used[in.proc.id] = 1'b0;
      m_blocked = 1'b0;
      n_ev[EV_KILL]++;
    end else if (ovl && was_pending) begin
      del(m_rdq, m_reclaimed.id);
      rjq_ins(m_reclaimed);
      m_blocked = 1'b1;
      n_ev[EV_UNDO]++;
    end else if (ovl) begin
      del(m_rdq, victim.id);
      rjq_ins(victim);
      m_blocked = 1'b1;
      n_ev[EV_REJECT]++;
    end else begin
      if (was_pending) n_ev[EV_RECLAIM_OK]++;
      if (!m_blocked && m_rjq.size() > 0 && m_rdq.size() < N) begin
        m_reclaimed = m_rjq[0];
        m_rjq.delete(0);
        rdq_ins(m_reclaimed);
        m_pending = 1'b1;
      end
    end
  endtask

  task automatic check(string what, logic [63:0] got, logic [63:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0h expected %0h (t=%0t)", what, got, exp, $time);
    end
  endtask

  task automatic compare();
    logic     ovl;
    process_t victim;
    analyse(ovl, victim);
    check("run.valid", process_to_run.valid, m_rdq.size() > 0);
    if (m_rdq.size() > 0) check("run.id", process_to_run.id, m_rdq[0].id);
    check("overload", dut.rdq_to_cu.overload, ovl);
    check("rjq.head_valid", dut.rjq_to_cu.head_valid, m_rjq.size() > 0);
    if (m_rjq.size() > 0) check("rjq.head", dut.rjq_to_cu.head, m_rjq[0]);
  endtask

  // apply one instruction to DUT and model, followed by `gap` idle cycles
  task automatic issue(instr_t in, int gap);
    logic     ovl;
    process_t victim;
    instr = in;
    model_edge(in);
    @(negedge clk);
    compare();
    instr = '0;
    model_edge(instr);
    @(negedge clk);
    compare();
    // two clock cycles after the instruction: is the overload resolved?
    analyse(ovl, victim);
    if (in.op == INSTR_INSERT) n_ev[ovl ? EV_LONGER : EV_TWO_CYCLE]++;
    for (int g = 1; g < gap; g++) begin
      model_edge(instr);
      @(negedge clk);
      compare();
    end
  endtask

  function automatic process_t rnd_proc(pid_t id);
    process_t p;
    p.id       = id;
    p.deadline = deadline_t'($urandom_range(6 * N, 5));
    p.wcet     = wcet_t'($urandom_range(12, 1));
    p.crit     = crit_t'($urandom_range(3));
    p.level    = 10'($urandom_range(3));
    return p;
  endfunction

  initial begin
    instr_t in;
    pid_t   id;
    int     n_live;
    instr = '0;
    foreach (n_ev[i]) n_ev[i] = 0;
    for (int iter = 0; iter < ITERATIONS; iter++) begin
      // reset DUT and model at the start of every iteration
      rst_n = 1'b0;
      used = '0;
      m_rdq.delete();
      m_rjq.delete();
      m_pending = 1'b0;
      m_blocked = 1'b0;
      m_reclaimed = '0;
      repeat (2) @(posedge clk);
      rst_n = 1'b1;
      @(negedge clk);
      compare();
      for (int it = 0; it < NUM_INSTR; it++) begin
        n_live = m_rdq.size() + m_rjq.size();
        in = '0;
        if (PAPER_MIX ? ($urandom_range(1) == 0 && n_live < ID_RANGE)
                      : ($urandom_range(3 * N) >= n_live && n_live < ID_RANGE)) begin
          do id = pid_t'($urandom_range(ID_RANGE - 1)); while (used[id]);
          used[id] = 1'b1;
          in = '{op: INSTR_INSERT, proc: rnd_proc(id)};
        end else begin
          in.op = INSTR_KILL;
          in.proc = rnd_proc(pid_t'($urandom_range(ID_RANGE - 1)));
          if (n_live > 0 && $urandom_range(9) != 0) begin
            int k;
            k = $urandom_range(n_live - 1);
            in.proc.id = (k < m_rdq.size()) ? m_rdq[k].id : m_rjq[k - m_rdq.size()].id;
          end
        end
        issue(in, $urandom_range(3, 1));
      end
      // let the control unit settle: every ready process must then meet its
      // deadline under worst-case execution times
      for (int c = 0; c < 2 * N + 4; c++) begin
        logic     ovl;
        process_t victim;
        analyse(ovl, victim);
        if (!ovl && !m_pending) break;
        model_edge(instr);
        @(negedge clk);
        compare();
      end
      check("no overload once settled", dut.rdq_to_cu.overload, 1'b0);
      // then kill everything
      while (m_rdq.size() + m_rjq.size() > 0) begin
        in = '0;
        in.op = INSTR_KILL;
        in.proc.id = (m_rdq.size() > 0) ? m_rdq[0].id : m_rjq[0].id;
        issue(in, 2);
      end
      check("empty at end", process_to_run.valid, 1'b0);
    end
    for (int e = 0; e < EV_NUM; e++) begin
      $display("N=%0d %-36s %0d", N, ev_name[e], n_ev[e]);
      if (e == EV_LONGER) continue;   // may or may not occur
      if (!EXPECT_FULL && (e == EV_INSERT_FULL || e == EV_RJQ_DROP)) continue;
      checks++;
      if (n_ev[e] == 0) begin
        failures++;
        $display("FAIL mechanism never happened: %s", ev_name[e]);
      end
    end
    done = 1'b1;
  end
