// reject_queue: the Reject Queue of the RED scheduler, holding the processes
// the rejection policy removed from the ready queue until they can be
// reclaimed.
//
// It is the same shift-register architecture as the ready queue, configured
// as a MAX queue: processes are ordered by priority {criticality, level}
// first and by deadline second, so cell 0 holds the process with the highest
// priority and, among those, the latest deadline. That head is offered to
// the control unit as the reclaim candidate.
//
// Interface: cmd (CU_TO_RJQ) carries INSERT or REMOVE(id) each cycle; REMOVE
// of the head's ID pops the head, REMOVE of any other ID kills a rejected
// process. status (RJQ_TO_CU) is a combinational function of the registered
// cells. One command per cycle, effective at the next rising edge.
// Follows the paper: shift registers, MAX order, priority-then-deadline key.
// Own choice: an INSERT into a full queue loses the last (smallest) entry.
module reject_queue
  import red_pkg::*;
#(
  parameter int unsigned N = MAX_PROC
) (
  input  logic       clk,
  input  logic       rst_n,
  input  qcmd_t      cmd,
  output rjq_to_cu_t status
);

  logic     valid [N];
  process_t proc  [N];
  logic     after [N];
  logic     rm    [N];

  for (genvar i = 0; i < N; i++) begin : g_cell
    logic     r_after, r_rm, r_valid, l_valid;
    process_t r_proc, l_proc;
    if (i == 0) begin : g_first
      assign r_after = 1'b0;
      assign r_rm    = 1'b0;
      assign r_valid = 1'b0;
      assign r_proc  = '0;
    end else begin : g_mid
      assign r_after = after[i-1];
      assign r_rm    = rm[i-1];
      assign r_valid = valid[i-1];
      assign r_proc  = proc[i-1];
    end
    if (i == N-1) begin : g_last
      assign l_valid = 1'b0;
      assign l_proc  = '0;
    end else begin : g_inner
      assign l_valid = valid[i+1];
      assign l_proc  = proc[i+1];
    end
    rjq_cell u_cell (
      .clk, .rst_n, .cmd,
      .right_after(r_after), .right_rm(r_rm), .right_valid(r_valid),
      .right_proc(r_proc),
      .left_valid(l_valid), .left_proc(l_proc),
      .valid_o(valid[i]), .proc_o(proc[i]),
      .after_o(after[i]), .rm_o(rm[i])
    );
  end

  assign status.full       = valid[N-1];
  assign status.head_valid = valid[0];
  assign status.head       = proc[0];

endmodule
