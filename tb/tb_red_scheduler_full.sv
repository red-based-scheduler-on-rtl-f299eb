// tb_red_scheduler_full: end-to-end test of the RED scheduler at its default
// size (64-process queues, 6-bit IDs). With unique 6-bit IDs at most 64
// processes exist, so neither queue can overflow at this size; the other
// mechanisms are required to happen. See red_tb_body.svh.
module tb_red_scheduler_full;
  import red_pkg::*;

  localparam int unsigned N           = MAX_PROC;
  localparam int          NUM_INSTR   = 100000;
  localparam int unsigned ID_RANGE    = 1 << ID_W;
  localparam bit          EXPECT_FULL = 1'b0;

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


  red_scheduler dut (.clk, .rst_n, .instr, .process_to_run);
endmodule
