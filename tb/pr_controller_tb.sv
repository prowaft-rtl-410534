// pr_controller_tb: self-checking test of the reconfiguration sequencer.
// Random target configurations (sometimes unchanged) are applied; for each
// partition the test counts the cycles pr_active is high (must equal
// pr_cycles for a changed partition, 0 otherwise), checks that load_en
// pulses once with the right frame, and that cur_variant, pr_events and the
// total busy time (one cycle per unchanged partition plus pr_cycles + 2 per
// changed one, plus one) match.
module pr_controller_tb;
  import prowaft_pkg::*;
  localparam int K = 6;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  variant_t target [K];
  kparam_t kparam [K];
  logic [31:0] pr_cycles;
  logic busy, done;
  logic [K-1:0] pr_active, load_en;
  frame_t load_frame [K];
  variant_t cur_variant [K];
  logic [31:0] pr_events, pr_cycles_total;
  int checks = 0, failures = 0;

  pr_controller #(.K(K)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    variant_t model [K];
    int act_cnt [K], load_cnt [K];
    int nchg, cyc, ev_exp, tot_exp;
    ev_exp = 0; tot_exp = 0;
    for (int k = 0; k < K; k++) begin model[k] = '0; target[k] = '0; kparam[k] = '0; end
    pr_cycles = 5;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      pr_cycles = 1 + $urandom % 12;
      nchg = 0;
      for (int k = 0; k < K; k++) begin
        target[k] = ($urandom % 2) ? variant_t'($urandom) : model[k];
        kparam[k] = kparam_t'($urandom);
        if (target[k] != model[k]) nchg++;
        act_cnt[k] = 0; load_cnt[k] = 0;
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        for (int k = 0; k < K; k++) begin
          if (pr_active[k]) act_cnt[k]++;
          if (load_en[k]) begin
            load_cnt[k]++;
            checks++;
            if (load_frame[k].variant != target[k] || load_frame[k].kp != kparam[k]) begin
              failures++; $display("FAIL t=%0d k=%0d frame", t, k);
            end
          end
        end
        @(negedge clk);
        cyc++;
        if (cyc > 1000) break;
      end
      for (int k = 0; k < K; k++) begin
        checks++;
        if (target[k] != model[k]) begin
          if (act_cnt[k] != int'(pr_cycles) || load_cnt[k] != 1) begin
            failures++; $display("FAIL t=%0d k=%0d act=%0d load=%0d", t, k, act_cnt[k], load_cnt[k]);
          end
        end else if (act_cnt[k] != 0 || load_cnt[k] != 0) begin
          failures++; $display("FAIL t=%0d k=%0d touched unchanged partition", t, k);
        end
        model[k] = target[k];
        checks++;
        if (cur_variant[k] != model[k]) begin failures++; $display("FAIL cur_variant"); end
      end
      ev_exp += nchg;
      tot_exp += nchg * int'(pr_cycles);
      checks++;
      if (cyc != (K - nchg) + nchg * (int'(pr_cycles) + 2) + 1) begin
        failures++; $display("FAIL t=%0d busy time %0d", t, cyc);
      end
      checks++;
      if (pr_events != 32'(ev_exp) || pr_cycles_total != 32'(tot_exp)) begin
        failures++; $display("FAIL counters %0d/%0d %0d/%0d", pr_events, ev_exp, pr_cycles_total, tot_exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
