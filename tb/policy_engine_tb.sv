// policy_engine_tb: self-checking test of the receding-horizon decision
// rule. Random candidate tables, loaded configurations, workloads and fault
// probabilities. For every workload the test recomputes, in floating point
// and independently of the RTL, WCS, each candidate's T_base, E_base, RRS,
// PR overhead, feasibility and J (Eqs. (1)-(8)), and the time and energy
// budgets the engine should have left. The engine's choice must be feasible and its cost within
// 0.2 % of the true minimum (fixed-point rounding may swap near-ties), the
// reconfiguration flag and "no feasible candidate" flag must match, and the
// decision must take 71 + 2*NCAND cycles after the accepting edge. Counts how often a
// reconfiguration, a stay, a time-budget-filtered candidate, a candidate
// filtered by the energy budget alone, a layer-type-
// filtered candidate and an empty feasible set occur; each must occur.
module policy_engine_tb;
  import prowaft_pkg::*;
  localparam int K = 6, NCAND = 16;
  logic clk = 0, rst_n = 0, hold = 0;
  logic wl_valid = 0, wl_ready;
  feat_t wl_feat;
  logic [31:0] wl_ops [K];
  q16_t p_fault [K];
  glob_t glob;
  q16_t rho [K], t_pr [K], e_pr [K];
  q16_t lut_sdata [64], lut_perr [64];
  cand_part_t cand_part [NCAND][K];
  cand_hdr_t cand_hdr [NCAND];
  variant_t cur_variant [K];
  logic dec_valid, dec_reconfig, dec_none;
  logic [$clog2(NCAND)-1:0] dec_cand;
  q16_t dec_cost, dec_rrs, dec_wcs, budget_rem, budget_e_rem;
  logic [15:0] decide_cycles;
  int checks = 0, failures = 0;

  policy_engine #(.K(K), .NCAND(NCAND)) dut (.*);
  always #5 clk = ~clk;

  function automatic real q2r(q16_t v); return real'(v) / 65536.0; endfunction

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic randomize_tables();
    for (int i = 0; i < 64; i++) begin
      lut_sdata[i] = q16_t'($urandom % 65537);
      lut_perr[i]  = q16_t'($urandom % 65537);
    end
    for (int j = 0; j < NCAND; j++) begin
      cand_hdr[j].tcomm   = q16_t'($urandom % (1 << 16));
      cand_hdr[j].pstatic = q16_t'($urandom % (1 << 16));
      cand_hdr[j].opmask  = (j == 0) ? 4'hF : 4'($urandom);
      for (int k = 0; k < K; k++) begin
        cand_part[j][k].variant  = variant_t'($urandom);
        cand_part[j][k].lambda   = q16_t'($urandom % 65537);
        cand_part[j][k].fanout   = 3'($urandom % 4);
        cand_part[j][k].inv_rate = q16_t'(200 + $urandom % 3000);
        cand_part[j][k].pdyn     = q16_t'($urandom % (2 << 16));
      end
    end
  endtask

  initial begin
    real    wcs_r, tb, eb, tref, eref, rrs, term, th, eh, jc, best, trec, erec, dpr, got_j;
    logic   feas [NCAND];
    real    jv [NCAND];
    logic   chg [NCAND];
    longint trec_i [NCAND], erec_i [NCAND];
    longint budget, budget_e;
    int     idx, nfeas, cyc, win_cnt, chosen;
    int     n_reconfig = 0, n_stay = 0, n_budget_cut = 0, n_energy_cut = 0, n_op_cut = 0, n_none = 0;

    glob = '0;
    glob.alpha = 26214; glob.beta = 13108; glob.gamma = 26214;
    glob.eta_t = 26214; glob.eta_e = 19661; glob.eta_r = 19661;
    glob.eps_t = 32768; glob.eps_e = 32768;
    glob.omega_t = 655; glob.omega_e = 655;
    glob.inv_z = 32'd40 << 16;
    glob.tmr_residual = 32'd6554;
    glob.budget_init = 32'd26 << 16;
    glob.budget_e_init = 32'd6 << 16;
    glob.window = 16'd3;
    glob.ref_idx = 8'd0;
    for (int k = 0; k < K; k++) begin
      rho[k] = q16_t'($urandom % 65537);
      t_pr[k] = 32'd275251;
      e_pr[k] = q16_t'(32768 + $urandom % 98304);   // 0.5 to 2.0 mJ
      cur_variant[k] = variant_t'($urandom);
      wl_ops[k] = 0; p_fault[k] = 0;
    end
    wl_feat = '0;
    randomize_tables();
    budget = 0; budget_e = 0; win_cnt = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 150; t++) begin
      if (t % 10 == 0) randomize_tables();
      // loaded configuration: often equal to some candidate
      if ($urandom % 2) begin
        idx = $urandom % NCAND;
        for (int k = 0; k < K; k++) cur_variant[k] = cand_part[idx][k].variant;
      end
      wl_feat = feat_t'($urandom);
      for (int k = 0; k < K; k++) begin
        wl_ops[k] = 50 + $urandom % 500;
        p_fault[k] = q16_t'(66 + $urandom % 590);
      end
      if (t % 37 == 5) for (int j = 1; j < NCAND; j++) cand_hdr[j].opmask = 4'h0;
      if (t % 37 == 5) cand_hdr[0].opmask = 4'h0;   // nothing implements the layer
      // model
      if (win_cnt == 0) begin
        budget = longint'(glob.budget_init);
        budget_e = longint'(glob.budget_e_init);
      end
      idx = {wl_feat.op, wl_feat.size_cls, wl_feat.prec};
      wcs_r = q2r(glob.alpha) * q2r(lut_sdata[idx]) + q2r(glob.beta) * (wl_feat.ctrl ? 1.0 : 0.0)
            + q2r(glob.gamma) * q2r(lut_perr[idx]);
      tref = 0; eref = 0;
      for (int j = -1; j < NCAND; j++) begin
        int jj;
        jj = (j < 0) ? int'(glob.ref_idx) : j;
        tb = q2r(cand_hdr[jj].tcomm); eb = 0;
        for (int k = 0; k < K; k++) begin
          tb += real'(wl_ops[k]) * q2r(cand_part[jj][k].inv_rate);
          eb += q2r(cand_part[jj][k].pdyn) * real'(wl_ops[k]) * q2r(cand_part[jj][k].inv_rate);
        end
        eb += q2r(cand_hdr[jj].pstatic) * tb;
        if (j < 0) begin tref = tb; eref = eb; continue; end
        rrs = 0; trec = 0; erec = 0; chg[j] = 0; trec_i[j] = 0; erec_i[j] = 0;
        for (int k = 0; k < K; k++) begin
          term = q2r(p_fault[k]) * wcs_r * q2r(cand_part[j][k].lambda)
               * real'(cand_part[j][k].fanout) * q2r(rho[k]);
          if (cand_part[j][k].variant.tmr) term *= q2r(glob.tmr_residual);
          rrs += term;
          if (cand_part[j][k].variant != cur_variant[k]) begin
            chg[j] = 1; trec += q2r(t_pr[k]); erec += q2r(e_pr[k]);
            trec_i[j] += longint'(t_pr[k]);
            erec_i[j] += longint'(e_pr[k]);
          end
        end
        rrs *= q2r(glob.inv_z);
        if (rrs > 1.0) rrs = 1.0;
        th = tb * (1.0 + q2r(glob.eps_t) * rrs);
        eh = eb * (1.0 + q2r(glob.eps_e) * rrs);
        dpr = q2r(glob.omega_t) * trec + q2r(glob.omega_e) * erec;
        jv[j] = q2r(glob.eta_t) * th / tref + q2r(glob.eta_e) * eh / eref
              + q2r(glob.eta_r) * rrs + (chg[j] ? dpr : 0.0);
        feas[j] = cand_hdr[j].opmask[wl_feat.op] &&
                  (!chg[j] || (trec_i[j] <= budget && erec_i[j] <= budget_e));
        if (cand_hdr[j].opmask[wl_feat.op] && chg[j] && trec_i[j] <= budget && erec_i[j] > budget_e)
          n_energy_cut++;
        if (cand_hdr[j].opmask[wl_feat.op] && chg[j] && trec_i[j] > budget) n_budget_cut++;
        if (!cand_hdr[j].opmask[wl_feat.op]) n_op_cut++;
      end
      best = 1.0e30; nfeas = 0; chosen = -1;
      for (int j = 0; j < NCAND; j++) if (feas[j]) begin
        nfeas++;
        if (jv[j] < best) begin best = jv[j]; chosen = j; end
      end
      // run
      @(negedge clk);
      checks++;
      if (!wl_ready) begin failures++; $display("FAIL not ready"); end
      wl_valid = 1;
      @(negedge clk);
      wl_valid = 0;
      cyc = 1;
      while (!dec_valid && cyc < 1000) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != 72 + 2 * NCAND || int'(decide_cycles) != cyc - 1) begin
        failures++; $display("FAIL t=%0d latency %0d / %0d", t, cyc, decide_cycles);
      end
      checks++;
      if (nfeas == 0) begin
        n_none++;
        if (!dec_none || dec_reconfig) begin failures++; $display("FAIL t=%0d expected none", t); end
      end else begin
        got_j = jv[dec_cand];
        if (dec_none || !feas[dec_cand] || got_j > best * 1.002 + 1e-4 || dec_reconfig != chg[dec_cand]) begin
          failures++;
          $display("FAIL t=%0d cand=%0d (J=%f feas=%0b) exp=%0d (J=%f) none=%0b", t, dec_cand, got_j, feas[dec_cand], chosen, best, dec_none);
        end
        checks++;
        if (q2r(dec_cost) - got_j > 0.002 * got_j + 1e-3 || got_j - q2r(dec_cost) > 0.002 * got_j + 1e-3) begin
          failures++; $display("FAIL t=%0d cost %f vs %f", t, q2r(dec_cost), got_j);
        end
        if (dec_reconfig) begin
          n_reconfig++;
          budget -= trec_i[dec_cand];
          budget_e -= erec_i[dec_cand];
        end
        else n_stay++;
      end
      win_cnt = (win_cnt + 1 >= int'(glob.window)) ? 0 : win_cnt + 1;
      checks++;
      if (longint'(budget_rem) != budget || longint'(budget_e_rem) != budget_e) begin
        failures++;
        $display("FAIL t=%0d budget %0d vs %0d, energy %0d vs %0d", t, budget_rem, budget,
                 budget_e_rem, budget_e);
      end
      if (t % 37 == 5) randomize_tables();
    end
    $display("reconfig=%0d stay=%0d budget_cut=%0d energy_cut=%0d op_cut=%0d none=%0d",
             n_reconfig, n_stay, n_budget_cut, n_energy_cut, n_op_cut, n_none);
    checks++;
    if (n_reconfig == 0 || n_stay == 0 || n_budget_cut == 0 || n_energy_cut == 0 || n_op_cut == 0 || n_none == 0) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
