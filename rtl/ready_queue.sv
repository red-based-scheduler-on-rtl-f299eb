// ready_queue: the Ready Queue of the RED scheduler, a shift-register MIN
// priority queue of N process cells ordered by deadline, extended with the
// overload analysis.
//
// Cell 0 holds the process with the earliest deadline; it is the running
// process and drives PROCESS_TO_RUN. Every cell keeps an execution-time
// register (its own WCET plus the WCETs of all processes to its right, i.e.
// scheduled earlier) and raises an overload bit when that sum exceeds its
// deadline. The overload bits are ORed into one bit for the control unit.
// The victim for rejection is the process with the lowest priority
// {criticality, level} among the cells up to and including the first
// (right-most) overloaded cell; on equal priority the later-deadline one is
// chosen.
//
// Interface: cmd (CU_TO_RDQ) is a broadcast bus carrying INSERT or REMOVE(id)
// each cycle; status (RDQ_TO_CU) and run (PROCESS_TO_RUN) are combinational
// functions of the registered cells, so one command takes effect on the next
// rising edge and the new overload/victim are visible right after it.
// Follows the paper: shift-register cells, execution-time registers, per-cell
// overload bits, one OR, victim rule. Own choices: tie-breaking (equal
// deadlines keep arrival order, equal victim priorities pick the later
// deadline) and that an INSERT into a full queue loses the last cell (the
// control unit never issues one).
module ready_queue
  import red_pkg::*;
#(
  parameter int unsigned N = MAX_PROC
) (
  input  logic       clk,
  input  logic       rst_n,
  input  qcmd_t      cmd,
  output rdq_to_cu_t status,
  output run_t       run
);

  logic     valid  [N];
  process_t proc   [N];
  exec_t    exec   [N];
  logic     after  [N];
  logic     rm     [N];
  logic     ovl    [N];
  wcet_t    rm_wcet;

  // WCET of the process named by a REMOVE (IDs are unique).
  always_comb begin
    rm_wcet = '0;
    for (int i = 0; i < N; i++)
      if (valid[i] && proc[i].id == cmd.proc.id) rm_wcet = proc[i].wcet;
  end

  for (genvar i = 0; i < N; i++) begin : g_cell
    logic     r_after, r_rm, r_valid, l_valid;
    process_t r_proc, l_proc;
    exec_t    r_exec, l_exec;
    if (i == 0) begin : g_first
      assign r_after = 1'b0;
      assign r_rm    = 1'b0;
      assign r_valid = 1'b0;
      assign r_proc  = '0;
      assign r_exec  = '0;
    end else begin : g_mid
      assign r_after = after[i-1];
      assign r_rm    = rm[i-1];
      assign r_valid = valid[i-1];
      assign r_proc  = proc[i-1];
      assign r_exec  = exec[i-1];
    end
    if (i == N-1) begin : g_last
      assign l_valid = 1'b0;
      assign l_proc  = '0;
      assign l_exec  = '0;
    end else begin : g_inner
      assign l_valid = valid[i+1];
      assign l_proc  = proc[i+1];
      assign l_exec  = exec[i+1];
    end
    rdq_cell u_cell (
      .clk, .rst_n, .cmd, .rm_wcet,
      .right_after(r_after), .right_rm(r_rm), .right_valid(r_valid),
      .right_proc(r_proc), .right_exec(r_exec),
      .left_valid(l_valid), .left_proc(l_proc), .left_exec(l_exec),
      .valid_o(valid[i]), .proc_o(proc[i]), .exec_o(exec[i]),
      .after_o(after[i]), .rm_o(rm[i]), .overload_o(ovl[i])
    );
  end

  // Overload OR and victim selection.
  always_comb begin
    logic  seen_ovl;
    logic  found;
    prio_t best;
    seen_ovl            = 1'b0;
    found               = 1'b0;
    best                = '0;
    status.victim       = '0;
    status.victim_valid = 1'b0;
    for (int i = 0; i < N; i++) begin
      // candidates: cells right of, or at, the first overloaded cell
      if (valid[i] && !seen_ovl && (!found || prio_of(proc[i]) <= best)) begin
        found         = 1'b1;
        best          = prio_of(proc[i]);
        status.victim = proc[i];
      end
      seen_ovl = seen_ovl | ovl[i];
    end
    status.overload     = seen_ovl;
    status.victim_valid = seen_ovl && found;
    status.full         = valid[N-1];
  end

  assign run.valid = valid[0];
  assign run.id    = proc[0].id;

endmodule
