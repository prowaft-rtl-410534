// pr_controller: sequences partial reconfiguration of the partitions.
//
// A start pulse presents the target variant of every partition (from the
// chosen candidate, or from a boot request). The controller visits the
// partitions in index order; each one whose target differs from its loaded
// variant is reconfigured: pr_active[k] is high for pr_cycles clock cycles,
// the time the configuration port takes to write the partial bitstream,
// after which load_en[k] pulses with the new frame (target variant plus the
// partition's kernel parameters) and cur_variant[k] takes the new value.
// Unchanged partitions cost one cycle each, changed ones pr_cycles + 2
// (detect, write, re-check). busy is high from start until
// done pulses. pr_events counts reconfigured partitions and pr_cycles_total
// the cycles spent in reconfiguration.
//
// The paper reconfigures between workloads and measures 4.20 ms for a single
// partition; the default of pr_cycles is that time at an assumed 100 MHz
// clock. Writing partitions one after another matches a single
// configuration port; the paper does not describe the order.
module pr_controller
  import prowaft_pkg::*;
#(
  parameter int unsigned K = 6
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  variant_t    target  [K],
  input  kparam_t     kparam  [K],
  input  logic [31:0] pr_cycles,
  output logic        busy,
  output logic        done,
  output logic [K-1:0] pr_active,
  output logic [K-1:0] load_en,
  output frame_t      load_frame [K],
  output variant_t    cur_variant [K],
  output logic [31:0] pr_events,
  output logic [31:0] pr_cycles_total
);

  localparam int unsigned KW = (K > 1) ? $clog2(K) : 1;

  variant_t    tgt_r [K];
  logic [KW-1:0] k_r;
  logic [31:0] cnt;
  logic        in_pr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < K; k++) begin
        tgt_r[k]       <= '0;
        cur_variant[k] <= '0;
        load_frame[k]  <= '0;
      end
      k_r             <= '0;
      cnt             <= '0;
      in_pr           <= 1'b0;
      busy            <= 1'b0;
      done            <= 1'b0;
      pr_active       <= '0;
      load_en         <= '0;
      pr_events       <= '0;
      pr_cycles_total <= '0;
    end else begin
      done    <= 1'b0;
      load_en <= '0;
      if (!busy) begin
        if (start) begin
          tgt_r <= target;
          k_r   <= '0;
          busy  <= 1'b1;
          in_pr <= 1'b0;
        end
      end else if (!in_pr) begin
        if (tgt_r[k_r] != cur_variant[k_r]) begin
          in_pr          <= 1'b1;
          cnt            <= (pr_cycles == '0) ? 32'd1 : pr_cycles;
          pr_active[k_r] <= 1'b1;
          pr_events      <= pr_events + 32'd1;
        end else if (32'(k_r) == K - 1) begin
          busy <= 1'b0;
          done <= 1'b1;
        end else begin
          k_r <= k_r + 1'b1;
        end
      end else begin
        pr_cycles_total <= pr_cycles_total + 32'd1;
        if (cnt == 32'd1) begin
          in_pr              <= 1'b0;
          pr_active[k_r]     <= 1'b0;
          load_en[k_r]       <= 1'b1;
          load_frame[k_r]    <= '{variant: tgt_r[k_r], kp: kparam[k_r]};
          cur_variant[k_r]   <= tgt_r[k_r];
        end else begin
          cnt <= cnt - 32'd1;
        end
      end
    end
  end

endmodule
