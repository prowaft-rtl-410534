// rrs_unit: Fault Propagation Factor and Reliability Risk Score.
//
// For each partition k of a candidate C_j it forms the paper's Eq. (4),
//   FPF_k = WCS * lambda_k(C_j) * Fanout_k(C_j),
// and Eq. (5), RRS = (1/Z) * sum_k p_k^fault * FPF_k * rho_k, clamped to
// 1.0. The four Q16.16 factors of each term are multiplied at full width and
// summed before the one final shift, so the small fault probabilities
// (0.001 to 0.01) keep their precision.
//
// The paper's formula has no term for protection. Here a partition whose
// candidate variant is TMR has its term multiplied by tmr_residual, the share
// of risk that survives triplication (0 by default). This is this design's
// choice. Combinational.
module rrs_unit
  import prowaft_pkg::*;
#(
  parameter int unsigned K = 6
) (
  input  q16_t       wcs,
  input  q16_t       p_fault [K],
  input  q16_t       rho     [K],
  input  cand_part_t part    [K],
  input  q16_t       inv_z,
  input  q16_t       tmr_residual,
  output q16_t       rrs
);

  always_comb begin
    logic [127:0] term, sum, scaled;
    sum = '0;
    for (int k = 0; k < K; k++) begin
      // Q16 * Q16 * Q16 * int * Q16 -> 64 fractional bits
      term = 128'(p_fault[k]) * 128'(wcs);
      term = term * 128'(part[k].lambda);
      term = term * 128'(part[k].fanout);
      term = term * 128'(rho[k]);
      if (part[k].variant.tmr) term = (term * 128'(tmr_residual)) >> 16;
      sum = sum + term;
    end
    scaled = (sum * 128'(inv_z)) >> 64;   // 80 fractional bits -> Q16
    rrs = (scaled > 128'(Q_ONE)) ? Q_ONE : scaled[31:0];
  end

endmodule
