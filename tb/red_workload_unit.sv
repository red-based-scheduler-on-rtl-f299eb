// red_workload_unit: one size of the verification workload, for
// tb_red_paper_workload. It runs a scheduler with N-process queues through
// ITERATIONS runs, each starting from reset and issuing NUM_INSTR CPU
// instructions chosen 50 % insert and 50 % kill, checks it cycle by cycle
// against the reference model of red_tb_body.svh, and reports its counts.
module red_workload_unit
  import red_pkg::*;
#(
  parameter int unsigned N          = 8,
  parameter int          ITERATIONS = 10,
  parameter int          NUM_INSTR  = 520
) (
  output logic done_o,
  output int   checks_o,
  output int   failures_o
);
  localparam int unsigned ID_RANGE    = 1 << ID_W;
  localparam bit          EXPECT_FULL = 1'b0;   // overflow is covered by tb_red_scheduler
  localparam bit          PAPER_MIX   = 1'b1;

  `include "red_tb_body.svh"

  red_scheduler #(.N(N)) dut (.clk, .rst_n, .instr, .process_to_run);

  assign done_o     = done;
  assign checks_o   = checks;
  assign failures_o = failures;
endmodule
