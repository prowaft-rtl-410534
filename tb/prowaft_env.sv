// prowaft_env: end-to-end test environment for prowaft_top, shared by the
// full-size testbench and the trace testbench.
//
// Setup. Writes the criticality look-up table (values chosen so that WCS
// spans the trace range 0.15-0.85), per-partition kernel parameters and a
// 16-entry candidate table over a fixed partition layout: partitions 0-3
// host convolution engines, 4 the pooling unit, 5 the batch-norm unit.
// Candidate j protects a subset of them with TMR: bit 0 of j triplicates
// P5, bit 1 P4, bit 2 P0 and P1, bit 3 P2 and P3. Candidate 0 (all
// baseline) is the static-base reference; candidate 15 is all-TMR. TMR
// variants are given 1.25x the time per unit of work and 1.5x the dynamic
// power of the baseline. These numbers are test data, not the paper's.
// Unless PR_OVERRIDE is non-zero the PR time stays at its reset value, and
// unless BUDGET is non-zero so does the PR budget per window.
//
// Each task: a CNN layer (Conv2D, DWConv, Pool or FC, input 32x32 to
// 224x224) with a fault probability following a sinusoid between 0.001 and
// 0.01 plus noise, as in the paper's fault model. The environment submits
// the descriptor, waits for the decision and any reconfiguration, checks
// that the partitions now hold the chosen candidate's variants and that
// every reconfigured partition was busy exactly the PR time, then streams
// beats through every partition and compares each output with a reference
// computed here. With some probability it first upsets one configuration bit
// of one replica of one partition (software fault injection). Outputs of a
// baseline partition with an upset replica 0 are not checked but counted
// as propagated errors; all other outputs must be exact (TMR must mask).
// Parity errors must be reported exactly for upsets in replicas in use.
//
// Mechanism counters (each must be non-zero at the end): boot, decisions,
// reconfigurations, stays, cycles in which the workload interface is
// stalled by a reconfiguration, budget
// exhaustion (remaining budget below one partition's PR cost), TMR masking,
// error propagation in a baseline partition, parity detection, replica
// mismatch, scrub of an upset by reconfiguration. Also checks adaptivity:
// the mean number of TMR partitions must be higher in high-risk tasks than
// in low-risk ones.
module prowaft_env
  import prowaft_pkg::*;
#(
  parameter int unsigned N_TASKS     = 40,
  parameter int unsigned PR_OVERRIDE = 0,
  parameter int unsigned SEU_PERMIL  = 300,
  parameter int unsigned BUDGET      = 0,
  // objective weights eta_T/eta_E/eta_R in Q16.16; 0 keeps the reset value
  parameter int unsigned ETA_T       = 0,
  parameter int unsigned ETA_E       = 0,
  parameter int unsigned ETA_R       = 0,
  // 0: skip the mechanism-coverage and adaptivity checks (for weightings
  // under which, e.g., TMR is always or never chosen)
  parameter bit          STRICT      = 1'b1
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   reconf_count,   // decisions that reconfigured
  output int   tmr_permil      // mean TMR partitions per task, x1000
);
  localparam int K = 6, NCAND = 16, TAPS = 9;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [11:0] cfg_addr = 0;
  logic [31:0] cfg_wdata = 0;
  logic boot_valid = 0, boot_ready;
  logic [3:0] boot_cand = 0;
  logic wl_valid = 0, wl_ready;
  feat_t wl_feat;
  logic [31:0] wl_ops [K];
  q16_t p_fault [K];
  logic dec_valid, dec_reconfig, dec_none;
  logic [3:0] dec_cand;
  q16_t dec_cost, dec_rrs, dec_wcs, budget_rem, budget_e_rem;
  logic [15:0] decide_cycles;
  logic pr_busy;
  logic [K-1:0] pr_active;
  variant_t cur_variant [K];
  logic [31:0] pr_events, pr_cycles_total;
  logic [2:0] tmr_count;
  logic [K-1:0] seu_en = 0;
  logic [1:0] seu_replica [K];
  logic [5:0] seu_bit [K];
  logic [K-1:0] parity_err, tmr_mismatch;
  logic [K-1:0] p_in_valid = 0, p_in_first = 0;
  logic signed [7:0] p_act [K][TAPS], p_wgt [K][TAPS];
  logic signed [31:0] p_acc_in [K];
  logic [K-1:0] p_out_valid;
  logic signed [31:0] p_out_data [K];

  prowaft_top dut (.*);

  always #5 clk = ~clk;

  // ---------------------------------------------------------------- helpers
  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    @(negedge clk); cfg_we = 1; cfg_addr = a; cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic logic is_tmr(input int j, input int k);
    case (k)
      0, 1: return j[2];
      2, 3: return j[3];
      4:    return j[1];
      default: return j[0];
    endcase
  endfunction

  function automatic kernel_e layout(input int k);
    return (k < 4) ? KER_CE : (k == 4) ? KER_PU : KER_BAU;
  endfunction

  // PR time of every partition, counted while pr_active is high
  int act_cycles [K];
  int n_pr_seen = 0, n_stall = 0;
  logic [K-1:0] pr_active_d = 0;
  logic upset [K][3];
  int   n_scrub = 0;
  always @(posedge clk) begin
    for (int k = 0; k < K; k++) begin
      if (!rst_n) act_cycles[k] = 0;
      else if (pr_active[k]) act_cycles[k]++;
      if (rst_n && pr_active_d[k] && !pr_active[k]) begin
        n_pr_seen++;
        checks++;
        if (act_cycles[k] != int'(dut.glob.pr_cycles)) begin
          failures++; $display("FAIL partition %0d PR took %0d cycles", k, act_cycles[k]);
        end
        act_cycles[k] = 0;
        if (upset[k][0] || upset[k][1] || upset[k][2]) n_scrub++;
        for (int r = 0; r < 3; r++) upset[k][r] = 0;
      end
    end
    pr_active_d <= rst_n ? pr_active : '0;
    if (pr_busy && !wl_ready && !boot_ready && rst_n) n_stall++;
  end

  kparam_t kp [K];
  longint  acc_m [K];

  function automatic longint golden(input int k, input kernel_e ker, input logic first);
    longint e;
    case (ker)
      KER_CE: begin
        e = first ? longint'(kp[k].bias) : acc_m[k];
        for (int i = 0; i < TAPS; i++) e += longint'(p_act[k][i]) * longint'(p_wgt[k][i]);
        e = longint'(int'(e));
      end
      KER_PU: begin
        e = -1000;
        for (int i = 0; i < TAPS; i++) if (longint'(p_act[k][i]) > e) e = longint'(p_act[k][i]);
      end
      KER_BAU: begin
        e = (longint'(p_acc_in[k]) * longint'(kp[k].scale)) >>> kp[k].shift;
        e += longint'(kp[k].bias);
        if (kp[k].relu && e < 0) e = 0;
        if (e > 127) e = 127;
        if (e < -128) e = -128;
      end
      default: e = 0;
    endcase
    return e;
  endfunction

  // ---------------------------------------------------------------- main
  initial begin
    static int n_boot = 0, n_dec = 0, n_reconf = 0, n_stay = 0, n_budget_low = 0;
    static int n_masked = 0, n_prop = 0, n_parity = 0, n_mismatch = 0;
    static real tmr_hi = 0, tmr_lo = 0;
    static int  n_hi = 0, n_lo = 0;
    real p, ph;
    int  dim, j, beats, kk, rr;
    logic upset_used, bad;
    longint e;
    done = 0; checks = 0; failures = 0; reconf_count = 0; tmr_permil = 0;
    wl_feat = '0;
    for (int k = 0; k < K; k++) begin
      wl_ops[k] = 0; p_fault[k] = 0; seu_replica[k] = 0; seu_bit[k] = 0; p_acc_in[k] = 0;
      act_cycles[k] = 0; acc_m[k] = 0;
      for (int r = 0; r < 3; r++) upset[k][r] = 0;
      for (int i = 0; i < TAPS; i++) begin p_act[k][i] = 0; p_wgt[k][i] = 0; end
    end
    repeat (4) @(negedge clk);
    rst_n = 1;
    // ---- tables
    wr(12'h00A, 32'd24 << 16);          // 1/Z
    if (PR_OVERRIDE != 0) wr(12'h00F, 32'(PR_OVERRIDE));
    if (BUDGET != 0) wr(12'h00C, 32'(BUDGET));
    if (ETA_T != 0) wr(12'h003, 32'(ETA_T));
    if (ETA_E != 0) wr(12'h004, 32'(ETA_E));
    if (ETA_R != 0) wr(12'h005, 32'(ETA_R));
    for (int i = 0; i < 64; i++) begin
      // S_data and P_error in [0.19, 1.0]; convolutions and FC more sensitive
      wr(12'h100 + 12'(2 * i), 32'(12452 + ((i * 2731) % 40000) + ((i >> 4) != 2 ? 12000 : 0)));
      wr(12'h101 + 12'(2 * i), 32'(12452 + ((i * 7919) % 52000)));
    end
    for (int k = 0; k < K; k++) begin
      kp[k] = kparam_t'($urandom);
      kp[k].shift = 5'(4 + $urandom % 6);
      wr(12'h050 + 12'(k), 32'(kp[k]));
    end
    for (int c = 0; c < NCAND; c++) begin
      for (int k = 0; k < K; k++) begin
        logic [11:0] base;
        base = 12'h800 | 12'(c << 6) | 12'(k << 3);
        wr(base | 12'd0, 32'({is_tmr(c, k), layout(k)}));
        wr(base | 12'd1, (k < 4) ? 32'd52429 : 32'd32768);          // lambda 0.8 / 0.5
        wr(base | 12'd2, (k < 4) ? 32'd1 : 32'd3);                  // fanout
        wr(base | 12'd3, is_tmr(c, k) ? 32'd819 : 32'd655);         // 0.0125 / 0.01 ms per unit
        wr(base | 12'd4, is_tmr(c, k) ? 32'd98304 : 32'd65536);     // 1.5 / 1.0
      end
      wr(12'h800 | 12'(c << 6) | 12'h038, 32'd6554);                // T_comm 0.1
      wr(12'h800 | 12'(c << 6) | 12'h039, 32'd32768);               // P_static 0.5
      wr(12'h800 | 12'(c << 6) | 12'h03A, 32'hF);
    end
    // ---- boot into the static-base configuration
    @(negedge clk);
    checks++;
    if (!boot_ready) begin failures++; $display("FAIL boot not ready"); end
    boot_valid = 1; boot_cand = 0;
    @(negedge clk);
    boot_valid = 0;
    n_boot++;
    while (pr_busy) @(negedge clk);
    for (int k = 0; k < K; k++) begin
      checks++;
      if (cur_variant[k] != variant_t'({1'b0, layout(k)})) begin failures++; $display("FAIL boot variant %0d", k); end
    end
    // ---- tasks
    for (int t = 0; t < int'(N_TASKS); t++) begin
      ph = 2.0 * 3.14159265 * real'(t) / 40.0;
      p  = 0.0055 + 0.004 * $sin(ph) + 0.0005 * (real'($urandom % 1000) / 1000.0 - 0.5);
      if (p < 0.001) p = 0.001;
      if (p > 0.01) p = 0.01;
      wl_feat.op = op_e'($urandom % 4);
      wl_feat.size_cls = 3'($urandom % 5);
      wl_feat.prec = 0;
      wl_feat.ctrl = 0;
      dim = 32 << (wl_feat.size_cls > 2 ? 2 : wl_feat.size_cls);
      if (wl_feat.size_cls == 4) dim = 224;
      for (int k = 0; k < K; k++) begin
        p_fault[k] = q16_t'(int'(p * 65536.0 * (0.8 + 0.1 * real'(k % 3))));
        if (k < 4) wl_ops[k] = (wl_feat.op == OP_POOL) ? 0 : 32'(dim * dim / 64);
        else if (k == 4) wl_ops[k] = (wl_feat.op == OP_POOL) ? 32'(dim * dim / 16) : 0;
        else wl_ops[k] = (wl_feat.op == OP_POOL) ? 0 : 32'(dim * dim / 256);
      end
      @(negedge clk);
      wl_valid = 1;
      while (!wl_ready) @(negedge clk);
      @(negedge clk);
      wl_valid = 0;
      while (!dec_valid) @(negedge clk);
      n_dec++;
      j = int'(dec_cand);
      if (budget_rem < 32'd275251) n_budget_low++;
      checks++;
      if (dec_none) begin failures++; $display("FAIL t=%0d no feasible candidate", t); end
      if (dec_reconfig) n_reconf++; else n_stay++;
      @(negedge clk);
      while (pr_busy) @(negedge clk);
      @(negedge clk);
      for (int k = 0; k < K; k++) begin
        checks++;
        if (cur_variant[k] != variant_t'({is_tmr(j, k), layout(k)})) begin
          failures++; $display("FAIL t=%0d partition %0d not in candidate %0d", t, k, j);
        end
      end
      tmr_permil += 1000 * int'(tmr_count);
      if (p > 0.0075) begin tmr_hi += real'(tmr_count); n_hi++; end
      if (p < 0.0035) begin tmr_lo += real'(tmr_count); n_lo++; end
      // ---- software fault injection
      if (($urandom % 1000) < SEU_PERMIL) begin
        kk = $urandom % K;
        rr = $urandom % 3;
        if (!(upset[kk][0] || upset[kk][1] || upset[kk][2])) begin
          @(negedge clk);
          seu_en[kk] = 1; seu_replica[kk] = 2'(rr);
          seu_bit[kk] = ($urandom % 2) ? 6'd30 + 6'($urandom % 2) : 6'($urandom % 30);
          @(negedge clk);
          seu_en = 0;
          upset[kk][rr] = 1;
        end
      end
      // ---- parity status
      @(negedge clk);
      for (int k = 0; k < K; k++) begin
        upset_used = upset[k][0] || (cur_variant[k].tmr && (upset[k][1] || upset[k][2]));
        checks++;
        if (parity_err[k] != upset_used) begin
          failures++; $display("FAIL t=%0d parity %0d: %0b vs %0b", t, k, parity_err[k], upset_used);
        end
        if (parity_err[k]) n_parity++;
      end
      // ---- data through every partition
      beats = 3;
      for (int b = 0; b < beats; b++) begin
        longint exp_v [K];
        @(negedge clk);
        for (int k = 0; k < K; k++) begin
          p_in_valid[k] = 1; p_in_first[k] = (b == 0);
          for (int i = 0; i < TAPS; i++) begin p_act[k][i] = 8'($urandom); p_wgt[k][i] = 8'($urandom); end
          // odd beats pool a 2x2 window: the other taps hold the int8 minimum
          if (cur_variant[k].kernel == KER_PU && b % 2 == 1)
            for (int i = 4; i < TAPS; i++) p_act[k][i] = -128;
          p_acc_in[k] = 32'($urandom % 40000) - 32'sd20000;
          exp_v[k] = golden(k, cur_variant[k].kernel, (b == 0));
          if (cur_variant[k].kernel == KER_CE) acc_m[k] = exp_v[k];
        end
        @(negedge clk);
        p_in_valid = 0;
        for (int k = 0; k < K; k++) begin
          if (tmr_mismatch[k]) n_mismatch++;
          bad = !p_out_valid[k] || p_out_data[k] != 32'(exp_v[k]);
          if (!cur_variant[k].tmr && upset[k][0]) begin
            if (bad) n_prop++;
          end else begin
            checks++;
            if (bad) begin
              failures++;
              $display("FAIL t=%0d k=%0d b=%0d out=%0d exp=%0d", t, k, b, p_out_data[k], exp_v[k]);
            end else if (cur_variant[k].tmr && (upset[k][0] || upset[k][1] || upset[k][2])) n_masked++;
          end
        end
      end
    end
    // ---- coverage of mechanisms
    $display("boot=%0d decisions=%0d reconfig=%0d stay=%0d pr_events=%0d stalls=%0d budget_low=%0d",
             n_boot, n_dec, n_reconf, n_stay, pr_events, n_stall, n_budget_low);
    $display("masked=%0d propagated=%0d parity=%0d mismatch=%0d scrubbed=%0d",
             n_masked, n_prop, n_parity, n_mismatch, n_scrub);
    if (n_hi > 0 && n_lo > 0)
      $display("mean TMR partitions: high risk %0.2f, low risk %0.2f", tmr_hi / n_hi, tmr_lo / n_lo);
    tmr_permil /= int'(N_TASKS);
    reconf_count = n_reconf;
    if (STRICT) checks++;
    if (STRICT && (n_boot == 0 || n_reconf == 0 || n_stay == 0 || n_stall == 0 || n_budget_low == 0 ||
        n_masked == 0 || n_prop == 0 || n_parity == 0 || n_mismatch == 0 || n_scrub == 0)) begin
      failures++; $display("FAIL a mechanism never occurred");
    end
    checks++;
    if (n_pr_seen != int'(pr_events)) begin failures++; $display("FAIL PR event count"); end
    if (STRICT) checks++;
    if (STRICT && (n_hi == 0 || n_lo == 0 || tmr_hi / n_hi <= tmr_lo / n_lo)) begin
      failures++; $display("FAIL TMR usage does not rise with fault risk");
    end
    done = 1;
  end
endmodule
