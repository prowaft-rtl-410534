// pr_overhead_tb: self-checking test of the PR overhead and feasibility
// filter. Random loaded and candidate variants (often equal, so that "stay"
// occurs), random per-partition PR costs and budgets; changes, T_reconfig,
// E_reconfig, Delta_PR and feasibility against the time and energy budgets
// are recomputed here.
module pr_overhead_tb;
  import prowaft_pkg::*;
  localparam int K = 6;
  variant_t cur_variant [K];
  cand_part_t part [K];
  cand_hdr_t hdr;
  op_e op;
  q16_t t_pr [K], e_pr [K];
  q16_t omega_t, omega_e, budget_rem, budget_e_rem;
  logic changes, feasible;
  q16_t t_reconfig, e_reconfig, delta_pr;
  int checks = 0, failures = 0;

  pr_overhead #(.K(K)) dut (.*);

  function automatic real q2r(q16_t v); return real'(v) / 65536.0; endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint ts, es;
    logic ch, fe;
    real dp;
    int n_infeasible_budget = 0, n_infeasible_energy = 0, n_stay = 0;
    for (int t = 0; t < 800; t++) begin
      ts = 0; es = 0; ch = 0;
      hdr = '0;
      hdr.opmask = 4'($urandom);
      op = op_e'($urandom);
      omega_t = q16_t'($urandom % 65536);
      omega_e = q16_t'($urandom % 65536);
      budget_rem = q16_t'($urandom % (20 << 16));
      budget_e_rem = (t % 2 == 0) ? 32'hFFFF_FFFF : q16_t'($urandom % (6 << 16));
      for (int k = 0; k < K; k++) begin
        part[k] = '0;
        cur_variant[k] = variant_t'($urandom);
        part[k].variant = ($urandom % 3 == 0) ? variant_t'($urandom) : cur_variant[k];
        if (t % 4 == 0) part[k].variant = cur_variant[k];
        t_pr[k] = q16_t'($urandom % (9 << 16));
        e_pr[k] = q16_t'($urandom % (3 << 16));
        if (part[k].variant != cur_variant[k]) begin
          ch = 1; ts += longint'(t_pr[k]); es += longint'(e_pr[k]);
        end
      end
      fe = hdr.opmask[op] && (!ch || (ts <= longint'(budget_rem) && es <= longint'(budget_e_rem)));
      if (hdr.opmask[op] && ch && ts > longint'(budget_rem)) n_infeasible_budget++;
      if (hdr.opmask[op] && ch && ts <= longint'(budget_rem) && es > longint'(budget_e_rem)) n_infeasible_energy++;
      if (!ch) n_stay++;
      dp = q2r(omega_t) * real'(ts) / 65536.0 + q2r(omega_e) * real'(es) / 65536.0;
      #1;
      checks++;
      if (changes !== ch || feasible !== fe || t_reconfig !== q16_t'(ts) || e_reconfig !== q16_t'(es)) begin
        failures++;
        $display("FAIL t=%0d ch=%0b/%0b fe=%0b/%0b tr=%0d/%0d", t, changes, ch, feasible, fe, t_reconfig, ts);
      end
      checks++;
      if (q2r(delta_pr) - dp > 3.0/65536 || dp - q2r(delta_pr) > 3.0/65536) begin
        failures++; $display("FAIL t=%0d dpr got=%f exp=%f", t, q2r(delta_pr), dp);
      end
    end
    checks++;
    if (n_infeasible_budget == 0 || n_infeasible_energy == 0 || n_stay == 0) begin failures++; $display("FAIL coverage"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
