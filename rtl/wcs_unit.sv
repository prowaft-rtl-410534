// wcs_unit: Workload Criticality Score.
//
// WCS = alpha * S_data + beta * S_control + gamma * P_error, the paper's
// Eq. (1). S_data (data sensitivity) and P_error (error-propagation
// likelihood) are read from look-up tables indexed by the workload's
// operator type, size class and precision, as the paper's offline profiling
// stores them; S_control is the workload's conditional-path flag, 0 or 1.
// All terms are Q16.16 in [0,1] and the weights should sum to 1. The score
// is registered: wcs is valid one cycle after feat is presented with
// in_valid, flagged by out_valid.
module wcs_unit
  import prowaft_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  feat_t feat,
  input  q16_t  alpha,
  input  q16_t  beta,
  input  q16_t  gamma,
  input  q16_t  lut_sdata [64],
  input  q16_t  lut_perr  [64],
  output logic  out_valid,
  output q16_t  wcs
);

  logic [WCS_IDX_W-1:0] idx;
  q16_t                 s_ctrl, w_next;

  assign idx    = {feat.op, feat.size_cls, feat.prec};
  assign s_ctrl = feat.ctrl ? Q_ONE : '0;
  assign w_next = qadd(qadd(qmul(alpha, lut_sdata[idx]), qmul(beta, s_ctrl)),
                       qmul(gamma, lut_perr[idx]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcs       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) wcs <= w_next;
    end
  end

endmodule
