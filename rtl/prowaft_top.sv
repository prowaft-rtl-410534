// prowaft_top: ProWAFT workload-aware fault-tolerance controller with K
// reconfigurable CNN-accelerator partitions.
//
// Operation. The host first writes the tables (param_tables address map) and
// loads an initial configuration with boot_valid/boot_cand, which
// reconfigures the partitions to candidate boot_cand without charging the
// PR budget. Then, for every workload (one CNN layer), it presents a
// descriptor on wl_valid/wl_feat/wl_ops together with the current
// per-partition fault-probability estimates p_fault. The policy engine
// scores the workload's criticality, evaluates every candidate
// configuration's composite cost and picks the cheapest feasible one
// (dec_valid). If that candidate differs from what is loaded, the PR
// controller rewrites the partitions that change, one after another, each
// for the programmed PR time; wl_ready and boot_ready stay low until it is
// finished. The host then streams the layer's data through the partitions'
// datapath ports.
//
// Partitions. Each partition hosts the 8-bit convolution engine, the
// max-pooling unit or the batch-norm/activation unit, as a baseline or a
// triplicated (TMR, majority-voted) variant. Its datapath ports (p_in_*,
// p_out_*) are brought out: the paper does not describe how partitions are
// chained or fed, so the host (or surrounding logic) does that. seu_* flips
// one configuration bit of one replica; parity_err and tmr_mismatch report
// detected and masked upsets. tmr_count is the number of partitions now
// holding a TMR variant.
//
// What follows the paper: K = 6 partitions, the CE/PU/BAU library with TMR
// variants, Eqs. (1)-(8) of the cost model and decision rule, parity
// detection, the (0.4, 0.3, 0.3) weights and the 4.20 ms PR time. This
// design's own choices: the Q16.16 number format, the table layout, the
// candidate count NCAND = 16, the 100 MHz clock behind PR_CYCLES, the
// per-partition data ports and the boot request.
module prowaft_top
  import prowaft_pkg::*;
#(
  parameter int unsigned K         = 6,
  parameter int unsigned NCAND     = 16,
  parameter int unsigned TAPS      = 9,
  parameter int unsigned PR_CYCLES = 420_000
) (
  input  logic        clk,
  input  logic        rst_n,
  // host configuration writes
  input  logic        cfg_we,
  input  logic [11:0] cfg_addr,
  input  logic [31:0] cfg_wdata,
  // initial configuration
  input  logic        boot_valid,
  input  logic [$clog2(NCAND)-1:0] boot_cand,
  output logic        boot_ready,
  // workload descriptors and health telemetry
  input  logic        wl_valid,
  output logic        wl_ready,
  input  feat_t       wl_feat,
  input  logic [31:0] wl_ops  [K],
  input  q16_t        p_fault [K],
  // decisions
  output logic        dec_valid,
  output logic [$clog2(NCAND)-1:0] dec_cand,
  output logic        dec_reconfig,
  output logic        dec_none,
  output q16_t        dec_cost,
  output q16_t        dec_rrs,
  output q16_t        dec_wcs,
  output logic [15:0] decide_cycles,
  output q16_t        budget_rem,
  output q16_t        budget_e_rem,
  // reconfiguration status
  output logic        pr_busy,
  output logic [K-1:0] pr_active,
  output variant_t    cur_variant [K],
  output logic [31:0] pr_events,
  output logic [31:0] pr_cycles_total,
  output logic [$clog2(K+1)-1:0] tmr_count,
  // fault injection and detection
  input  logic [K-1:0] seu_en,
  input  logic [1:0]  seu_replica [K],
  input  logic [5:0]  seu_bit     [K],
  output logic [K-1:0] parity_err,
  output logic [K-1:0] tmr_mismatch,
  // partition datapaths
  input  logic [K-1:0] p_in_valid,
  input  logic [K-1:0] p_in_first,
  input  logic signed [7:0]  p_act   [K][TAPS],
  input  logic signed [7:0]  p_wgt   [K][TAPS],
  input  logic signed [31:0] p_acc_in[K],
  output logic [K-1:0] p_out_valid,
  output logic signed [31:0] p_out_data [K]
);

  glob_t      glob;
  q16_t       rho [K], t_pr [K], e_pr [K];
  kparam_t    kparam [K];
  q16_t       lut_sdata [64], lut_perr [64];
  cand_part_t cand_part [NCAND][K];
  cand_hdr_t  cand_hdr  [NCAND];

  logic       pr_start, pr_done;
  variant_t   pr_target [K];
  logic [K-1:0] load_en;
  frame_t     load_frame [K];
  logic [$clog2(NCAND)-1:0] tgt_cand;

  param_tables #(.K(K), .NCAND(NCAND), .PR_CYCLES(PR_CYCLES)) u_tab (
    .clk, .rst_n, .we(cfg_we), .addr(cfg_addr), .wdata(cfg_wdata),
    .glob, .rho, .t_pr, .e_pr, .kparam, .lut_sdata, .lut_perr,
    .cand_part, .cand_hdr
  );

  policy_engine #(.K(K), .NCAND(NCAND)) u_pol (
    .clk, .rst_n, .hold(pr_busy),
    .wl_valid, .wl_ready, .wl_feat, .wl_ops, .p_fault,
    .glob, .rho, .t_pr, .e_pr, .lut_sdata, .lut_perr, .cand_part, .cand_hdr,
    .cur_variant,
    .dec_valid, .dec_cand, .dec_reconfig, .dec_none, .dec_cost, .dec_rrs,
    .dec_wcs, .budget_rem, .budget_e_rem, .decide_cycles
  );

  // A decision that needs reconfiguration, or a boot request, starts the PR
  // controller. Boot is only accepted between workloads.
  assign boot_ready = wl_ready;
  assign pr_start   = (dec_valid && dec_reconfig) || (boot_valid && boot_ready);
  assign tgt_cand   = (dec_valid && dec_reconfig) ? dec_cand : boot_cand;

  always_comb begin
    for (int k = 0; k < K; k++) pr_target[k] = cand_part[tgt_cand][k].variant;
  end

  pr_controller #(.K(K)) u_pr (
    .clk, .rst_n, .start(pr_start), .target(pr_target), .kparam,
    .pr_cycles(glob.pr_cycles),
    .busy(pr_busy), .done(pr_done), .pr_active, .load_en, .load_frame,
    .cur_variant, .pr_events, .pr_cycles_total
  );

  for (genvar k = 0; k < K; k++) begin : g_part
    variant_t v_unused;
    recon_partition #(.TAPS(TAPS)) u_part (
      .clk, .rst_n,
      .pr_active   (pr_active[k]),
      .load_en     (load_en[k]),
      .load_frame  (load_frame[k]),
      .seu_en      (seu_en[k]),
      .seu_replica (seu_replica[k]),
      .seu_bit     (seu_bit[k]),
      .in_valid    (p_in_valid[k]),
      .in_first    (p_in_first[k]),
      .act         (p_act[k]),
      .wgt         (p_wgt[k]),
      .acc_in      (p_acc_in[k]),
      .out_valid   (p_out_valid[k]),
      .out_data    (p_out_data[k]),
      .variant     (v_unused),
      .parity_err  (parity_err[k]),
      .tmr_mismatch(tmr_mismatch[k])
    );
  end

  always_comb begin
    tmr_count = '0;
    for (int k = 0; k < K; k++) tmr_count = tmr_count + ($clog2(K+1))'(cur_variant[k].tmr);
  end

  // Descriptor handshake: once offered, a workload stays offered.
  a_wl_hold: assert property (@(posedge clk) disable iff (!rst_n)
    wl_valid && !wl_ready |=> wl_valid);
  // The PR controller is never started while it is busy.
  a_pr_start: assert property (@(posedge clk) disable iff (!rst_n)
    pr_start |-> !pr_busy);

endmodule
