// policy_engine: receding-horizon decision rule of ProWAFT.
//
// For each incoming workload (a feature vector and the work mapped to each
// partition) the engine evaluates every entry of the candidate table and
// picks a_t = argmin_j J(C_j) over the feasible candidates, where (paper,
// Eqs. (7) and (8))
//   J(C_j) = eta_T * T~ + eta_E * E~ + eta_R * RRS + [C_j != C_cur] * Delta_PR
//   T~ = T_base * (1 + eps_T * RRS) / T_base(ref)
//   E~ = E_base * (1 + eps_E * RRS) / E_base(ref)
// The reference is the static-base candidate, table entry glob.ref_idx, and
// the normalisation divides by its fault-free T_base and E_base. Candidates
// that do not implement the layer type, or whose reconfiguration time or
// energy exceeds the remaining budget, are skipped. "Stay" is the candidate equal
// to the loaded configuration, for which no PR cost is charged.
//
// Sequence after a workload is accepted (wl_valid && wl_ready):
//   1 cycle   WCS look-up (wcs_unit)
//   1 cycle   reference candidate's T_base, E_base (perf_model)
//   2 x 34    reciprocals of the two references (recip_divider)
//   2/cand    per candidate: T_base, E_base, RRS, Delta_PR registered, then
//             J formed and compared with the best so far
// then dec_valid pulses for one cycle with the chosen index, whether it
// needs reconfiguration, and its cost; dec_none is set instead when no
// candidate was feasible (the configuration then stays). Ties keep the lower
// index. decide_cycles counts the cycles of the last decision.
//
// PR budget: budget_rem is reloaded with glob.budget_init at the first
// workload of every window of glob.window workloads and decreased by the
// chosen candidate's reconfiguration time; budget_e_rem does the same with
// glob.budget_e_init and the reconfiguration energy. The paper names a
// budget B_PR "(time and/or energy)" over an execution window but not its
// length or reload rule; those are this design's choices. wl_ready is low while a decision is in flight or
// hold (reconfiguration in progress) is high.
module policy_engine
  import prowaft_pkg::*;
#(
  parameter int unsigned K     = 6,
  parameter int unsigned NCAND = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hold,
  // workload descriptor
  input  logic        wl_valid,
  output logic        wl_ready,
  input  feat_t       wl_feat,
  input  logic [31:0] wl_ops [K],
  // health telemetry
  input  q16_t        p_fault [K],
  // tables
  input  glob_t       glob,
  input  q16_t        rho      [K],
  input  q16_t        t_pr     [K],
  input  q16_t        e_pr     [K],
  input  q16_t        lut_sdata[64],
  input  q16_t        lut_perr [64],
  input  cand_part_t  cand_part[NCAND][K],
  input  cand_hdr_t   cand_hdr [NCAND],
  input  variant_t    cur_variant [K],
  // decision
  output logic        dec_valid,
  output logic [$clog2(NCAND)-1:0] dec_cand,
  output logic        dec_reconfig,
  output logic        dec_none,
  output q16_t        dec_cost,
  output q16_t        dec_rrs,
  output q16_t        dec_wcs,
  output q16_t        budget_rem,
  output q16_t        budget_e_rem,
  output logic [15:0] decide_cycles
);

  localparam int unsigned JW = $clog2(NCAND);

  typedef enum logic [2:0] {
    S_IDLE, S_WCS, S_REF, S_DIVT, S_DIVE, S_EVA, S_EVB, S_DONE
  } state_e;

  state_e      state;
  feat_t       feat_r;
  logic [31:0] ops_r [K];
  logic [JW-1:0] j, best_j;
  logic        best_found, best_changes;
  q16_t        best_cost, best_trec, best_erec, best_rrs;
  q16_t        e_ref, recip_t, recip_e;
  logic [15:0] win_cnt;
  logic [15:0] cyc;

  // per-candidate registered intermediates
  q16_t        tb_r, eb_r, rrs_r, dpr_r, trec_r, erec_r;
  logic        chg_r, feas_r;

  // combinational evaluators, fed with candidate sel
  logic [JW-1:0] sel;
  q16_t        tb_c, eb_c, rrs_c, dpr_c, trec_c, erec_c, wcs;
  logic        chg_c, feas_c, wcs_valid;
  logic        div_start, div_busy, div_done;
  q16_t        div_d, div_q;

  assign sel = (state == S_REF) ? glob.ref_idx[JW-1:0] : j;

  wcs_unit u_wcs (
    .clk, .rst_n,
    .in_valid (state == S_IDLE && wl_valid && wl_ready),
    .feat     (wl_feat),
    .alpha    (glob.alpha), .beta(glob.beta), .gamma(glob.gamma),
    .lut_sdata, .lut_perr,
    .out_valid(wcs_valid),
    .wcs      (wcs)
  );

  perf_model #(.K(K)) u_perf (
    .ops(ops_r), .part(cand_part[sel]), .hdr(cand_hdr[sel]),
    .t_base(tb_c), .e_base(eb_c)
  );

  rrs_unit #(.K(K)) u_rrs (
    .wcs, .p_fault, .rho, .part(cand_part[sel]),
    .inv_z(glob.inv_z), .tmr_residual(glob.tmr_residual),
    .rrs(rrs_c)
  );

  pr_overhead #(.K(K)) u_pro (
    .cur_variant, .part(cand_part[sel]), .hdr(cand_hdr[sel]),
    .op(feat_r.op), .t_pr, .e_pr,
    .omega_t(glob.omega_t), .omega_e(glob.omega_e),
    .budget_rem, .budget_e_rem,
    .changes(chg_c), .t_reconfig(trec_c), .e_reconfig(erec_c),
    .delta_pr(dpr_c), .feasible(feas_c)
  );

  recip_divider u_div (
    .clk, .rst_n, .start(div_start), .d(div_d),
    .busy(div_busy), .done(div_done), .q(div_q)
  );

  assign div_start = (state == S_REF) || (state == S_DIVT && div_done);
  assign div_d     = (state == S_REF) ? tb_c : e_ref;

  // composite cost of the registered candidate
  q16_t t_hat, e_hat, t_n, e_n, c_total, j_cost;
  always_comb begin
    t_hat   = qmul(tb_r, qadd(Q_ONE, qmul(glob.eps_t, rrs_r)));
    e_hat   = qmul(eb_r, qadd(Q_ONE, qmul(glob.eps_e, rrs_r)));
    t_n     = qmul(t_hat, recip_t);
    e_n     = qmul(e_hat, recip_e);
    c_total = qadd(qadd(qmul(glob.eta_t, t_n), qmul(glob.eta_e, e_n)),
                   qmul(glob.eta_r, rrs_r));
    j_cost  = qadd(c_total, chg_r ? dpr_r : '0);
  end

  assign wl_ready = (state == S_IDLE) && !hold;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      feat_r       <= '0;
      for (int k = 0; k < K; k++) ops_r[k] <= '0;
      j            <= '0;
      best_j       <= '0;
      best_found   <= 1'b0;
      best_changes <= 1'b0;
      best_cost    <= '0;
      best_trec    <= '0;
      best_erec    <= '0;
      best_rrs     <= '0;
      e_ref        <= '0;
      recip_t      <= '0;
      recip_e      <= '0;
      win_cnt      <= '0;
      budget_rem   <= '0;
      budget_e_rem <= '0;
      cyc          <= '0;
      decide_cycles<= '0;
      tb_r <= '0; eb_r <= '0; rrs_r <= '0; dpr_r <= '0; trec_r <= '0; erec_r <= '0;
      chg_r <= 1'b0; feas_r <= 1'b0;
      dec_valid    <= 1'b0;
      dec_cand     <= '0;
      dec_reconfig <= 1'b0;
      dec_none     <= 1'b0;
      dec_cost     <= '0;
      dec_rrs      <= '0;
      dec_wcs      <= '0;
    end else begin
      dec_valid <= 1'b0;
      if (state != S_IDLE) cyc <= cyc + 16'd1;
      unique case (state)
        S_IDLE: if (wl_valid && wl_ready) begin
          feat_r <= wl_feat;
          ops_r  <= wl_ops;
          cyc    <= 16'd1;
          if (win_cnt == '0) begin
            budget_rem   <= glob.budget_init;
            budget_e_rem <= glob.budget_e_init;
          end
          state  <= S_WCS;
        end
        S_WCS: if (wcs_valid) state <= S_REF;
        S_REF: begin
          e_ref <= eb_c;
          state <= S_DIVT;
        end
        S_DIVT: if (div_done) begin
          recip_t <= div_q;
          state   <= S_DIVE;
        end
        S_DIVE: if (div_done) begin
          recip_e    <= div_q;
          j          <= '0;
          best_found <= 1'b0;
          state      <= S_EVA;
        end
        S_EVA: begin
          tb_r   <= tb_c;
          eb_r   <= eb_c;
          rrs_r  <= rrs_c;
          dpr_r  <= dpr_c;
          trec_r <= trec_c;
          erec_r <= erec_c;
          chg_r  <= chg_c;
          feas_r <= feas_c;
          state  <= S_EVB;
        end
        S_EVB: begin
          if (feas_r && (!best_found || j_cost < best_cost)) begin
            best_found   <= 1'b1;
            best_j       <= j;
            best_cost    <= j_cost;
            best_changes <= chg_r;
            best_trec    <= trec_r;
            best_erec    <= erec_r;
            best_rrs     <= rrs_r;
          end
          if (32'(j) == NCAND - 1) begin
            state <= S_DONE;
          end else begin
            j     <= j + 1'b1;
            state <= S_EVA;
          end
        end
        S_DONE: begin
          dec_valid     <= 1'b1;
          dec_none      <= !best_found;
          dec_cand      <= best_found ? best_j : '0;
          dec_reconfig  <= best_found && best_changes;
          dec_cost      <= best_found ? best_cost : '0;
          dec_rrs       <= best_rrs;
          dec_wcs       <= wcs;
          decide_cycles <= cyc;
          if (best_found && best_changes) begin
            budget_rem   <= budget_rem - best_trec;
            budget_e_rem <= budget_e_rem - best_erec;
          end
          win_cnt <= (win_cnt + 16'd1 >= glob.window) ? '0 : win_cnt + 16'd1;
          state   <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
