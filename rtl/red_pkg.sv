// red_pkg: types and constants shared by the RED scheduler coprocessor.
//
// A process is described by an ID, an absolute deadline, its worst-case
// execution time (WCET), a two-bit criticality and a ten-bit priority level.
// The combined priority {criticality, level} is what the victim selection and
// the reject queue compare; criticality is the more significant part.
//
// Taken from the paper: the two-bit criticality encoding (00 non-RT / low soft
// RT, 01 medium soft RT, 10 high soft RT, 11 hard RT), the 1024 priority levels
// and the smallest possible process-ID width for 64 processes.
// Chosen here: 16-bit deadlines and WCETs, the instruction encoding and the
// command bundles between the sub-blocks (the paper only names them
// CU_TO_RDQ, RDQ_TO_CU, CU_TO_RJQ and RJQ_TO_CU).
package red_pkg;

  // Largest number of processes the paper evaluates; default queue depth.
  localparam int unsigned MAX_PROC   = 64;
  // Smallest ID width that can name MAX_PROC processes.
  localparam int unsigned ID_W       = $clog2(MAX_PROC);
  localparam int unsigned DEADLINE_W = 16;
  localparam int unsigned WCET_W     = 16;
  localparam int unsigned LEVEL_W    = 10;              // 1024 priority levels
  // An execution-time register holds a sum of up to MAX_PROC WCETs.
  localparam int unsigned EXEC_W     = WCET_W + ID_W;
  localparam int unsigned PRIO_W     = 2 + LEVEL_W;

  typedef logic [ID_W-1:0]       pid_t;
  typedef logic [DEADLINE_W-1:0] deadline_t;
  typedef logic [WCET_W-1:0]     wcet_t;
  typedef logic [EXEC_W-1:0]     exec_t;
  typedef logic [PRIO_W-1:0]     prio_t;

  typedef enum logic [1:0] {
    CRIT_LOW    = 2'b00,   // non-RT process or low-priority soft RT process
    CRIT_MEDIUM = 2'b01,   // soft RT process of medium priority
    CRIT_HIGH   = 2'b10,   // soft RT process of high priority
    CRIT_HARD   = 2'b11    // hard RT (safety-critical) process
  } crit_t;

  typedef struct packed {
    pid_t                 id;
    deadline_t            deadline;
    wcet_t                wcet;
    crit_t                crit;
    logic [LEVEL_W-1:0]   level;
  } process_t;

  // Coprocessor instruction from the CPU (INSTR).
  typedef enum logic [1:0] {
    INSTR_NOP    = 2'd0,
    INSTR_INSERT = 2'd1,   // process insertion
    INSTR_KILL   = 2'd2    // process kill, by ID (proc.id); other fields unused
  } instr_op_t;

  typedef struct packed {
    instr_op_t op;
    process_t  proc;
  } instr_t;

  // PROCESS_TO_RUN: the process selected for execution.
  typedef struct packed {
    logic valid;
    pid_t id;
  } run_t;

  // Command bus broadcast to every cell of a queue.
  typedef enum logic [1:0] {
    Q_NOP    = 2'd0,
    Q_INSERT = 2'd1,       // insert proc at its sorted place
    Q_REMOVE = 2'd2        // remove the process whose ID is proc.id
  } qop_t;

  typedef struct packed {
    qop_t     op;
    process_t proc;
  } qcmd_t;

  // RDQ_TO_CU: status of the ready queue seen by the control unit.
  typedef struct packed {
    logic     full;
    logic     overload;      // OR of all per-cell overload bits
    logic     victim_valid;
    process_t victim;        // process the rejection policy selects
  } rdq_to_cu_t;

  // RJQ_TO_CU: status of the reject queue seen by the control unit.
  typedef struct packed {
    logic     full;
    logic     head_valid;
    process_t head;          // highest priority, latest deadline
  } rjq_to_cu_t;

  function automatic prio_t prio_of(process_t p);
    return {p.crit, p.level};
  endfunction

endpackage
