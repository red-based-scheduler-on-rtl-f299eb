// tb_red_scheduler: end-to-end test of the RED scheduler with 8-process
// queues and 64 process IDs, so that both queues fill up and every mechanism
// (rejection, reclaim, undone reclaim, insert into a full ready queue,
// reject-queue overflow) happens. See red_tb_body.svh for the stimulus and
// the reference model.
module tb_red_scheduler;
  import red_pkg::*;

  localparam int unsigned N           = 8;
  localparam int          NUM_INSTR   = 20000;
  localparam int unsigned ID_RANGE    = 1 << ID_W;
  localparam bit          EXPECT_FULL = 1'b1;

  localparam int          ITERATIONS  = 1;
  localparam bit          PAPER_MIX   = 1'b0;

  `include "red_tb_body.svh"

  initial begin : watchdog
    repeat (ITERATIONS * (NUM_INSTR * 4 + 1000)) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : report
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end


  red_scheduler #(.N(N)) dut (.clk, .rst_n, .instr, .process_to_run);
endmodule
