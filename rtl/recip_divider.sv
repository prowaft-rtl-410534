// recip_divider: sequential Q16.16 reciprocal, q = 1/d.
//
// Computes floor(2^32 / d) by restoring division, one quotient bit per
// clock, 33 bits in all, and saturates to 32'hFFFF_FFFF when the result does
// not fit or d is zero. A start pulse latches d; done pulses for one cycle
// 33 cycles later with q valid (q holds until the next start). busy is high
// in between. Used to normalise latency and energy to the static-base
// reference before they enter the composite cost.
module recip_divider
  import prowaft_pkg::*;
(
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  q16_t d,
  output logic busy,
  output logic done,
  output q16_t q
);

  logic [32:0] rem, rem_n;
  logic [32:0] quo, quo_n;
  q16_t        dl;
  logic [5:0]  cnt;
  logic [33:0] trial;

  // Dividend is 2^32: bit 32 is one, all lower bits zero. The step with
  // cnt = i brings in dividend bit i, for i = 32 down to 0.
  always_comb begin
    trial = {rem, (cnt == 6'd32)};
    if (trial >= 34'(dl)) begin
      rem_n = 33'(trial - 34'(dl));
      quo_n = {quo[31:0], 1'b1};
    end else begin
      rem_n = trial[32:0];
      quo_n = {quo[31:0], 1'b0};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem  <= '0;
      quo  <= '0;
      dl   <= '0;
      cnt  <= '0;
      busy <= 1'b0;
      done <= 1'b0;
      q    <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        dl   <= d;
        rem  <= '0;
        quo  <= '0;
        cnt  <= 6'd32;
        busy <= 1'b1;
      end else if (busy) begin
        rem <= rem_n;
        quo <= quo_n;
        if (cnt == 6'd0) begin
          busy <= 1'b0;
          done <= 1'b1;
          q    <= (dl == '0 || quo_n[32]) ? Q_MAX : quo_n[31:0];
        end else begin
          cnt <= cnt - 6'd1;
        end
      end
    end
  end

endmodule
