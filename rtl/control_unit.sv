// control_unit: the Control Unit of the RED scheduler.
//
// Every cycle it issues at most one command to each queue:
//   - A CPU instruction has precedence. INSERT goes to the ready queue, or to
//     the reject queue when the ready queue is full; KILL removes the ID from
//     both queues (it is in at most one of them).
//   - Otherwise, if the ready queue reports an overload, one process moves to
//     the reject queue: the process reclaimed in the previous cycle if there
//     was one (the reclaim is undone), else the victim the ready queue chose.
//   - Otherwise, if the reject queue is not empty, the ready queue is not full
//     and reclaiming is not blocked, the reject-queue head is moved back to
//     the ready queue. The next cycle shows whether that overloaded it.
// Reclaiming is blocked after a rejection or an undone reclaim and stays
// blocked until the CPU kills a process: only a kill frees execution time,
// so trying again before that would only overload the queue once more.
//
// Timing: a CPU instruction is applied at the rising edge that samples it;
// the overload it causes is resolved at the next edge, so an operation takes
// two clock cycles. The CPU must leave INSTR at NOP for at least one cycle
// after each instruction (asserted below); that cycle is the one the control
// unit uses for rejection or reclaiming.
// Follows the paper: instruction forwarding, rejection of the victim on
// overload, reclaiming the head of the reject queue, undoing a reclaim that
// overloads. Own choices: the precedence above, the blocking rule, sending an
// insert to the reject queue when the ready queue is full, one-cycle
// instruction spacing.
module control_unit
  import red_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  instr_t     instr,        // INSTR
  input  rdq_to_cu_t rdq,          // RDQ_TO_CU
  input  rjq_to_cu_t rjq,          // RJQ_TO_CU
  output qcmd_t      to_rdq,       // CU_TO_RDQ
  output qcmd_t      to_rjq        // CU_TO_RJQ
);

  typedef enum logic [2:0] {
    ACT_IDLE,
    ACT_INSERT,          // CPU insert into the ready queue
    ACT_INSERT_REJECT,   // CPU insert while the ready queue is full
    ACT_KILL,            // CPU kill
    ACT_REJECT,          // overload: victim to the reject queue
    ACT_RECLAIM,         // reject-queue head back to the ready queue
    ACT_UNDO             // reclaim overloaded: move it back
  } action_t;

  action_t  action;
  logic     pending_q;   // a reclaim was done in the previous cycle
  process_t reclaimed_q;
  logic     blocked_q;

  always_comb begin
    to_rdq = '{op: Q_NOP, proc: '0};
    to_rjq = '{op: Q_NOP, proc: '0};
    action = ACT_IDLE;
    if (instr.op == INSTR_INSERT) begin
      if (rdq.full) begin
        action = ACT_INSERT_REJECT;
        to_rjq = '{op: Q_INSERT, proc: instr.proc};
      end else begin
        action = ACT_INSERT;
        to_rdq = '{op: Q_INSERT, proc: instr.proc};
      end
    end else if (instr.op == INSTR_KILL) begin
      action = ACT_KILL;
      to_rdq = '{op: Q_REMOVE, proc: instr.proc};
      to_rjq = '{op: Q_REMOVE, proc: instr.proc};
    end else if (rdq.overload) begin
      if (pending_q) begin
        action = ACT_UNDO;
        to_rdq = '{op: Q_REMOVE, proc: reclaimed_q};
        to_rjq = '{op: Q_INSERT, proc: reclaimed_q};
      end else if (rdq.victim_valid) begin
        action = ACT_REJECT;
        to_rdq = '{op: Q_REMOVE, proc: rdq.victim};
        to_rjq = '{op: Q_INSERT, proc: rdq.victim};
      end
    end else if (!blocked_q && rjq.head_valid && !rdq.full) begin
      action = ACT_RECLAIM;
      to_rjq = '{op: Q_REMOVE, proc: rjq.head};
      to_rdq = '{op: Q_INSERT, proc: rjq.head};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending_q   <= 1'b0;
      reclaimed_q <= '0;
      blocked_q   <= 1'b0;
    end else begin
      pending_q <= (action == ACT_RECLAIM);
      if (action == ACT_RECLAIM) reclaimed_q <= rjq.head;
      if (action == ACT_KILL)
        blocked_q <= 1'b0;
      else if (action == ACT_REJECT || action == ACT_UNDO)
        blocked_q <= 1'b1;
    end
  end

  // The CPU leaves at least one idle cycle after every instruction.
  a_instr_spacing: assert property (@(posedge clk) disable iff (!rst_n)
    (instr.op != INSTR_NOP) |=> (instr.op == INSTR_NOP))
    else $error("INSTR issued in two consecutive cycles");

endmodule
