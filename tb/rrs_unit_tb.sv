// rrs_unit_tb: self-checking test of the Fault Propagation Factor and
// Reliability Risk Score, Eqs. (4)-(5). Random fault probabilities in the
// paper's range 0.001-0.01, random WCS, utilisation, fanout, severity and
// TMR flags; RRS is recomputed here in floating point (with the TMR residual
// applied to triplicated partitions, and clamped to 1) and must agree
// within 2 LSB.
module rrs_unit_tb;
  import prowaft_pkg::*;
  localparam int K = 6;
  q16_t wcs, inv_z, tmr_residual;
  q16_t p_fault [K], rho [K];
  cand_part_t part [K];
  q16_t rrs;
  int checks = 0, failures = 0;

  rrs_unit #(.K(K)) dut (.*);

  function automatic real q2r(q16_t v); return real'(v) / 65536.0; endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real s, term;
    int  nclamp = 0;
    for (int t = 0; t < 600; t++) begin
      wcs          = q16_t'($urandom % 65537);
      tmr_residual = (t % 2) ? q16_t'($urandom % 65537) : '0;
      inv_z        = q16_t'(($urandom % 40) << 16) + q16_t'($urandom % 65536);
      if (t % 50 == 0) inv_z = 32'd200 << 16;   // forces the clamp
      s = 0;
      for (int k = 0; k < K; k++) begin
        part[k] = '0;
        p_fault[k] = q16_t'(66 + $urandom % 590);
        rho[k]     = q16_t'($urandom % 65537);
        part[k].lambda  = q16_t'($urandom % 65537);
        part[k].fanout  = 3'($urandom);
        part[k].variant = variant_t'($urandom);
        term = q2r(p_fault[k]) * q2r(wcs) * q2r(part[k].lambda) * real'(part[k].fanout) * q2r(rho[k]);
        if (part[k].variant.tmr) term = term * q2r(tmr_residual);
        s += term;
      end
      s = s * q2r(inv_z);
      if (s > 1.0) begin s = 1.0; nclamp++; end
      #1;
      checks++;
      if (q2r(rrs) - s > 2.0/65536 || s - q2r(rrs) > 2.0/65536) begin
        failures++; $display("FAIL t=%0d got=%f exp=%f", t, q2r(rrs), s);
      end
    end
    checks++;
    if (nclamp == 0) begin failures++; $display("FAIL clamp never exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
