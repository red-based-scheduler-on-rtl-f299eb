// tb_red_paper_workload: the verification workload applied to every size of
// the area and power tables, 8 to 64 processes in steps of 8. Each size runs
// ITERATIONS pseudo-random runs of 520 instructions (half inserts, half
// kills), every run from reset, checked cycle by cycle against a reference
// model. The sizes run side by side; the result line sums them.
module tb_red_paper_workload;
  localparam int ITERATIONS = 100;
  localparam int NUM_INSTR  = 520;
  localparam int NSIZES     = 8;

  logic done     [NSIZES];
  int   checks   [NSIZES];
  int   failures [NSIZES];

  for (genvar s = 0; s < NSIZES; s++) begin : g_size
    red_workload_unit #(.N(8 * (s + 1)), .ITERATIONS(ITERATIONS), .NUM_INSTR(NUM_INSTR))
      u_run (.done_o(done[s]), .checks_o(checks[s]), .failures_o(failures[s]));
  end

  function automatic bit all_done();
    for (int s = 0; s < NSIZES; s++) if (!done[s]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin : watchdog
    #(64'd10 * ITERATIONS * (NUM_INSTR * 4 + 1000) * 10);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", 1, 1);
    $finish;
  end

  initial begin : report
    int c, f;
    #1;
    while (!all_done()) #1000;
    c = 0;
    f = 0;
    for (int s = 0; s < NSIZES; s++) begin
      c += checks[s];
      f += failures[s];
    end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
endmodule
