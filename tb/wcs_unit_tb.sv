// wcs_unit_tb: self-checking test of the Workload Criticality Score.
// Random look-up tables and weights (summing to one); for random workload
// features the registered score must equal alpha*S_data + beta*S_control +
// gamma*P_error, computed here in floating point, within 4 LSB, one cycle
// after the request.
module wcs_unit_tb;
  import prowaft_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  feat_t feat;
  q16_t alpha, beta, gamma;
  q16_t lut_sdata [64], lut_perr [64];
  logic out_valid;
  q16_t wcs;
  int checks = 0, failures = 0;

  wcs_unit dut (.*);
  always #5 clk = ~clk;

  function automatic real q2r(q16_t v); return real'(v) / 65536.0; endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real e, d;
    int idx;
    feat = '0;
    for (int i = 0; i < 64; i++) begin
      lut_sdata[i] = q16_t'($urandom % 65537);
      lut_perr[i]  = q16_t'($urandom % 65537);
    end
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      alpha = q16_t'($urandom % 65537);
      beta  = q16_t'($urandom % (65537 - alpha));
      gamma = 65536 - alpha - beta;
      if (t == 0) begin alpha = 26214; beta = 13108; gamma = 26214; end
      feat = feat_t'($urandom);
      idx  = {feat.op, feat.size_cls, feat.prec};
      e = q2r(alpha) * q2r(lut_sdata[idx]) + q2r(beta) * (feat.ctrl ? 1.0 : 0.0)
        + q2r(gamma) * q2r(lut_perr[idx]);
      in_valid = 1;
      @(negedge clk);
      in_valid = 0;
      checks++;
      d = q2r(wcs) - e;
      if (!out_valid || d > 4.0/65536 || d < -4.0/65536) begin
        failures++;
        $display("FAIL t=%0d got=%f exp=%f", t, q2r(wcs), e);
      end
      @(negedge clk);
      checks++;
      if (out_valid) begin failures++; $display("FAIL valid not a pulse"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
