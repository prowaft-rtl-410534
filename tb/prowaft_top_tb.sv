// prowaft_top_tb: end-to-end test of prowaft_top at its default parameters
// and reset values, including the 420000-cycle (4.20 ms at 100 MHz) PR time
// per partition. The PR budget register is lowered to 30 ms per
// 40-task window so that the budget runs out. 80 tasks, two sinusoidal periods of fault risk; see
// prowaft_env for what is checked.
module prowaft_top_tb;
  logic done;
  int checks, failures;

  prowaft_env #(.N_TASKS(80), .PR_OVERRIDE(0), .SEU_PERMIL(500), .BUDGET(30 << 16)) env (.done, .checks, .failures);

  initial begin
    #4s;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #1 wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
