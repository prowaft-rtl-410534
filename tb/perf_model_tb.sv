// perf_model_tb: self-checking test of the fault-free latency and energy
// model, Eqs. (2)-(3). Random per-partition work, time-per-work, dynamic
// power, communication time and static power; T_base and E_base are
// recomputed here in floating point and must agree within 0.01 % plus a few
// LSB.
module perf_model_tb;
  import prowaft_pkg::*;
  localparam int K = 6;
  logic [31:0] ops [K];
  cand_part_t part [K];
  cand_hdr_t hdr;
  q16_t t_base, e_base;
  int checks = 0, failures = 0;

  perf_model #(.K(K)) dut (.*);

  function automatic real q2r(q16_t v); return real'(v) / 65536.0; endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real te, ee, tk;
    for (int t = 0; t < 500; t++) begin
      te = 0; ee = 0;
      hdr = '0;
      hdr.tcomm   = q16_t'($urandom % (4 << 16));
      hdr.pstatic = q16_t'($urandom % (2 << 16));
      for (int k = 0; k < K; k++) begin
        part[k] = '0;
        ops[k]  = $urandom % 200;
        part[k].inv_rate = q16_t'($urandom % (1 << 16));
        part[k].pdyn     = q16_t'($urandom % (3 << 16));
        tk = real'(ops[k]) * q2r(part[k].inv_rate);
        te += tk;
      end
      for (int k = 0; k < K; k++) ee += q2r(part[k].pdyn) * real'(ops[k]) * q2r(part[k].inv_rate);
      te += q2r(hdr.tcomm);
      ee += q2r(hdr.pstatic) * te;
      #1;
      checks++;
      if ((q2r(t_base) - te) > 1e-4*te + 2.0/65536 || (te - q2r(t_base)) > 1e-4*te + 2.0/65536) begin
        failures++; $display("FAIL t=%0d T got=%f exp=%f", t, q2r(t_base), te);
      end
      checks++;
      if ((q2r(e_base) - ee) > 1e-4*ee + 16.0/65536 || (ee - q2r(e_base)) > 1e-4*ee + 16.0/65536) begin
        failures++; $display("FAIL t=%0d E got=%f exp=%f", t, q2r(e_base), ee);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
