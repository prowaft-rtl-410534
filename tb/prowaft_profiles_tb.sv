// prowaft_profiles_tb: the objective-weight profiles of the sensitivity
// study, each run over the same 500-task trace.
//
// Four copies of the end-to-end environment (prowaft_env, each with its own
// prowaft_top) run side by side. They differ only in the composite-cost
// weights written to eta_T/eta_E/eta_R:
//   balanced      0.4 / 0.3 / 0.3 (the reset values)
//   performance   0.6 / 0.3 / 0.1
//   energy        0.3 / 0.6 / 0.1
//   reliability   0.2 / 0.2 / 0.6
// As in the trace testbench, the PR time register is set to 2000 cycles so
// that 500 tasks simulate in seconds. Every environment still checks its
// decisions, PR timing, partition contents and data outputs. The
// coverage and adaptivity checks are off, because a one-sided weighting may
// legitimately never pick TMR, or always pick it.
//
// On top of that, this testbench checks that the weights move the
// operating point the expected way. The mean number of TMR partitions per
// task must be ordered reliability > balanced > performance, and
// reliability > energy. Reconfiguration counts are printed for comparison.
// They are not checked, because they depend on the synthetic candidate
// costs.
module prowaft_profiles_tb;
  localparam int unsigned Q = 65536;
  localparam int NP = 4;

  logic done [NP];
  int   chk [NP], fl [NP], rc [NP], tp [NP];

  prowaft_env #(.N_TASKS(500), .PR_OVERRIDE(2000), .STRICT(1'b0))
    env_bal  (.done(done[0]), .checks(chk[0]), .failures(fl[0]), .reconf_count(rc[0]), .tmr_permil(tp[0]));
  prowaft_env #(.N_TASKS(500), .PR_OVERRIDE(2000), .STRICT(1'b0),
                .ETA_T(Q * 6 / 10), .ETA_E(Q * 3 / 10), .ETA_R(Q * 1 / 10))
    env_perf (.done(done[1]), .checks(chk[1]), .failures(fl[1]), .reconf_count(rc[1]), .tmr_permil(tp[1]));
  prowaft_env #(.N_TASKS(500), .PR_OVERRIDE(2000), .STRICT(1'b0),
                .ETA_T(Q * 3 / 10), .ETA_E(Q * 6 / 10), .ETA_R(Q * 1 / 10))
    env_en   (.done(done[2]), .checks(chk[2]), .failures(fl[2]), .reconf_count(rc[2]), .tmr_permil(tp[2]));
  prowaft_env #(.N_TASKS(500), .PR_OVERRIDE(2000), .STRICT(1'b0),
                .ETA_T(Q * 2 / 10), .ETA_E(Q * 2 / 10), .ETA_R(Q * 6 / 10))
    env_rel  (.done(done[3]), .checks(chk[3]), .failures(fl[3]), .reconf_count(rc[3]), .tmr_permil(tp[3]));

  int checks = 0, failures = 0;

  initial begin
    #2000ms;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

  initial begin
    #1 wait (done[0] && done[1] && done[2] && done[3]);
    for (int i = 0; i < NP; i++) begin
      checks += chk[i];
      failures += fl[i];
    end
    $display("balanced:    reconfig=%0d mean TMR partitions=%0d.%03d", rc[0], tp[0] / 1000, tp[0] % 1000);
    $display("performance: reconfig=%0d mean TMR partitions=%0d.%03d", rc[1], tp[1] / 1000, tp[1] % 1000);
    $display("energy:      reconfig=%0d mean TMR partitions=%0d.%03d", rc[2], tp[2] / 1000, tp[2] % 1000);
    $display("reliability: reconfig=%0d mean TMR partitions=%0d.%03d", rc[3], tp[3] / 1000, tp[3] % 1000);
    checks++;
    if (!(tp[3] > tp[0] && tp[0] > tp[1])) begin
      failures++;
      $display("FAIL TMR usage not ordered reliability > balanced > performance");
    end
    checks++;
    if (!(tp[3] > tp[2])) begin
      failures++;
      $display("FAIL TMR usage of the energy profile not below the reliability profile");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
