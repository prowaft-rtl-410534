// prowaft_trace_tb: runs the paper's 500-task trace length through
// prowaft_top (default parameters). The PR time register is set to 2000
// cycles instead of its 4.20 ms reset value so that 500 tasks simulate in
// seconds; everything else is as in prowaft_env.
module prowaft_trace_tb;
  logic done;
  int checks, failures;

  prowaft_env #(.N_TASKS(500), .PR_OVERRIDE(2000)) env (.done, .checks, .failures);

  initial begin
    #400ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #1 wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
