// pr_overhead: partial-reconfiguration overhead of a candidate and its
// feasibility.
//
// A partition must be reconfigured when the candidate's variant for it
// differs from the one currently loaded. The reconfiguration time and energy
// of the switch are the sums of the per-partition costs t_pr_k and e_pr_k of
// those partitions, and Delta_PR = omega_T * T_reconfig + omega_E *
// E_reconfig (the paper's Eq. (6)). The candidate is feasible when it
// implements the workload's layer type and, if it needs any
// reconfiguration, T_reconfig and E_reconfig fit in the remaining time and
// energy budgets. The paper filters out actions whose Delta_PR violates a
// budget "(time and/or energy)"; comparing each side of the cost with its
// own budget is this design's reading. Combinational.
//
// The paper says T_reconfig and E_reconfig are characterised offline. Adding
// per-partition costs is this design's choice; it matches the paper's
// measured 4.20 ms for one partition and 8.50 ms average for multi-partition
// updates only approximately.
module pr_overhead
  import prowaft_pkg::*;
#(
  parameter int unsigned K = 6
) (
  input  variant_t   cur_variant [K],
  input  cand_part_t part        [K],
  input  cand_hdr_t  hdr,
  input  op_e        op,
  input  q16_t       t_pr   [K],
  input  q16_t       e_pr   [K],
  input  q16_t       omega_t,
  input  q16_t       omega_e,
  input  q16_t       budget_rem,
  input  q16_t       budget_e_rem,
  output logic       changes,
  output q16_t       t_reconfig,
  output q16_t       e_reconfig,
  output q16_t       delta_pr,
  output logic       feasible
);

  always_comb begin
    logic [63:0] ts, es;
    ts = '0;
    es = '0;
    changes = 1'b0;
    for (int k = 0; k < K; k++) begin
      if (part[k].variant != cur_variant[k]) begin
        changes = 1'b1;
        ts = ts + 64'(t_pr[k]);
        es = es + 64'(e_pr[k]);
      end
    end
    t_reconfig = qsat64(ts);
    e_reconfig = qsat64(es);
    delta_pr   = qadd(qmul(omega_t, t_reconfig), qmul(omega_e, e_reconfig));
    feasible   = hdr.opmask[op] && (!changes || (t_reconfig <= budget_rem && e_reconfig <= budget_e_rem));
  end

endmodule
