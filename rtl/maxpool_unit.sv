// maxpool_unit: max-pooling unit (PU).
//
// Each accepted beat carries one pooling window of WIN signed 8-bit
// activations. The unit outputs the largest of them, sign-extended to 32
// bits, one cycle later with out_valid high. WIN is 9 by default, so one
// beat holds a 3x3 window; a smaller window (2x2) is pooled by filling the
// unused positions with -128, the int8 minimum, which never wins.
//
// The paper names a "Max-Pooling Unit" and nothing of its insides; the
// window size, the padding convention and the one-cycle timing are this
// design's choices.
module maxpool_unit #(
  parameter int unsigned WIN = 9
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [7:0]  win [WIN],
  output logic               out_valid,
  output logic signed [31:0] max_out
);

  logic signed [7:0] m;

  always_comb begin
    m = win[0];
    for (int i = 1; i < WIN; i++) begin
      if (win[i] > m) m = win[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_out   <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) max_out <= 32'(m);
    end
  end

endmodule
