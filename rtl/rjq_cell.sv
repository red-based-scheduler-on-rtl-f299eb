// rjq_cell: one process cell of the reject queue (shift-register MAX queue).
//
// The sort key is {criticality, level, deadline}: priority first, deadline
// second, larger keys towards cell 0. The cell holds one process and decides
// from its own comparator and its neighbours' state:
//   INSERT: a cell that is empty or holds a smaller key than the new process
//           takes the new process if its right neighbour keeps its own, else
//           the right neighbour's process (equal keys keep arrival order).
//   REMOVE: the cell holding the named ID and every cell to its left take the
//           process of their left neighbour.
// The MAX ordering and the two ordering criteria follow the paper; the
// ripple signals are this design's choice. State changes on the rising edge;
// after_o and rm_o are combinational.
module rjq_cell
  import red_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  qcmd_t    cmd,
  input  logic     right_after,   // tie to 0 for cell 0
  input  logic     right_rm,
  input  logic     right_valid,
  input  process_t right_proc,
  input  logic     left_valid,    // tie to 0 for the last cell
  input  process_t left_proc,
  output logic     valid_o,
  output process_t proc_o,
  output logic     after_o,
  output logic     rm_o
);

  logic     valid_q;
  process_t proc_q;

  assign after_o = !valid_q ||
                   ({cmd.proc.crit, cmd.proc.level, cmd.proc.deadline} >
                    {proc_q.crit, proc_q.level, proc_q.deadline});
  assign rm_o    = right_rm || (valid_q && proc_q.id == cmd.proc.id);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= 1'b0;
      proc_q  <= '0;
    end else begin
      unique case (cmd.op)
        Q_INSERT: if (after_o) begin
          valid_q <= right_after ? right_valid : 1'b1;
          proc_q  <= right_after ? right_proc : cmd.proc;
        end
        Q_REMOVE: if (rm_o) begin
          valid_q <= left_valid;
          proc_q  <= left_proc;
        end
        default: ;
      endcase
    end
  end

  assign valid_o = valid_q;
  assign proc_o  = proc_q;

endmodule
