// rdq_cell: one process cell of the ready queue (shift-register priority
// queue ordered by deadline, earliest deadline in cell 0).
//
// The cell holds one process and its execution-time register: the process's
// WCET plus the WCETs of every process to its right (earlier deadlines). All
// cells see the same command bus and decide locally from their own comparator
// and their neighbours' state:
//   INSERT: a cell whose process has a later deadline than the new one (or
//           that is empty) takes either the new process, if its right
//           neighbour keeps its own, or its right neighbour's process.
//           In both cases the register becomes right_exec + new WCET, which
//           also adds the new WCET to every cell left of the insertion point.
//   REMOVE: the matching cell and every cell to its left take the process of
//           their left neighbour, and subtract the removed WCET from the
//           register they take over.
// The overload bit is 1 when the cell's accumulated execution time exceeds
// the cell's deadline. The register, comparator, shift rules and overload
// test follow the paper; the ripple signals after_o/rm_o are this design's
// way to tell each cell its position relative to the insertion/removal point.
// Timing: the state updates on the rising clock edge; outputs are registered
// except after_o, rm_o and overload_o, which are combinational.
module rdq_cell
  import red_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  qcmd_t    cmd,
  input  wcet_t    rm_wcet,       // WCET of the process being removed
  // right neighbour (earlier deadline); tie to 0 for cell 0
  input  logic     right_after,
  input  logic     right_rm,
  input  logic     right_valid,
  input  process_t right_proc,
  input  exec_t    right_exec,
  // left neighbour (later deadline); tie to 0 for the last cell
  input  logic     left_valid,
  input  process_t left_proc,
  input  exec_t    left_exec,
  output logic     valid_o,
  output process_t proc_o,
  output exec_t    exec_o,
  output logic     after_o,       // new process goes before this cell's one
  output logic     rm_o,          // removal at this cell or to its right
  output logic     overload_o
);

  logic     valid_q;
  process_t proc_q;
  exec_t    exec_q;

  assign after_o    = !valid_q || (cmd.proc.deadline < proc_q.deadline);
  assign rm_o       = right_rm || (valid_q && proc_q.id == cmd.proc.id);
  assign overload_o = valid_q && (exec_q > exec_t'(proc_q.deadline));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      proc_q  <= '0;
      exec_q  <= '0;
    end else begin
      unique case (cmd.op)
        Q_INSERT: if (after_o) begin
          valid_q <= right_after ? right_valid : 1'b1;
          proc_q  <= right_after ? right_proc : cmd.proc;
          exec_q  <= right_exec + exec_t'(cmd.proc.wcet);
        end
        Q_REMOVE: if (rm_o) begin
          valid_q <= left_valid;
          proc_q  <= left_proc;
          exec_q  <= left_exec - exec_t'(rm_wcet);
        end
        default: ;
      endcase
    end
  end

  assign valid_o = valid_q;
  assign proc_o  = proc_q;
  assign exec_o  = exec_q;

endmodule
