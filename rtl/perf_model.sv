// perf_model: fault-free latency and energy of one candidate configuration.
//
// Implements the paper's Eqs. (2) and (3):
//   T_base = sum_k Ops_k / (f_k * PE_k(C_j)) + T_comm(C_j)
//   E_base = sum_k P_k^dyn(C_j) * Ops_k / (f_k * PE_k(C_j))
//            + P_static(C_j) * T_base
// The division is held in the candidate table as its reciprocal inv_rate
// (time per unit of work), so the unit needs only multipliers. ops[k] is an
// integer count of work units mapped to partition k; the product with the
// Q16.16 inv_rate is a Q16.16 time. Sums saturate. Combinational.
module perf_model
  import prowaft_pkg::*;
#(
  parameter int unsigned K = 6
) (
  input  logic [31:0] ops  [K],
  input  cand_part_t  part [K],
  input  cand_hdr_t   hdr,
  output q16_t        t_base,
  output q16_t        e_base
);

  always_comb begin
    logic [63:0] tsum, esum;
    q16_t        tk;
    tsum = 64'(hdr.tcomm);
    esum = '0;
    for (int k = 0; k < K; k++) begin
      tk   = qsat64(64'(ops[k]) * 64'(part[k].inv_rate));
      tsum = tsum + 64'(tk);
      esum = esum + 64'(qmul(part[k].pdyn, tk));
    end
    t_base = qsat64(tsum);
    e_base = qsat64(esum + 64'(qmul(hdr.pstatic, t_base)));
  end

endmodule
