// red_scheduler: RED (Robust Earliest Deadline) scheduler coprocessor.
//
// The CPU sends one instruction (insert a process, or kill a process by ID)
// on INSTR; the coprocessor answers with PROCESS_TO_RUN, the ready process
// with the earliest deadline. Inside, a Control Unit forwards instructions to
// a Ready Queue (deadline-ordered, with overload analysis) and moves
// processes between it and a Reject Queue (priority-ordered): the lowest
// priority process that makes a deadline miss possible is rejected, and
// rejected processes are reclaimed when they fit again.
//
// Interface: instr is sampled on every rising edge (op NOP when idle, at most
// one instruction every two cycles); process_to_run is registered state
// (valid = 0 when no process is ready). Reset is asynchronous, active low.
// Timing: an instruction is applied at the edge that samples it and the
// overload it causes is resolved at the following edge: two cycles.
// The structure and the four internal buses follow the paper's top-level
// block diagram; the encodings are this design's (see red_pkg).
module red_scheduler
  import red_pkg::*;
#(
  parameter int unsigned N = MAX_PROC   // processes per queue
) (
  input  logic   clk,
  input  logic   rst_n,
  input  instr_t instr,                 // INSTR
  output run_t   process_to_run         // PROCESS_TO_RUN
);

  qcmd_t      cu_to_rdq, cu_to_rjq;
  rdq_to_cu_t rdq_to_cu;
  rjq_to_cu_t rjq_to_cu;

  control_unit u_cu (
    .clk, .rst_n, .instr,
    .rdq(rdq_to_cu), .rjq(rjq_to_cu),
    .to_rdq(cu_to_rdq), .to_rjq(cu_to_rjq)
  );

  ready_queue #(.N(N)) u_rdq (
    .clk, .rst_n, .cmd(cu_to_rdq), .status(rdq_to_cu), .run(process_to_run)
  );

  reject_queue #(.N(N)) u_rjq (
    .clk, .rst_n, .cmd(cu_to_rjq), .status(rjq_to_cu)
  );

endmodule
