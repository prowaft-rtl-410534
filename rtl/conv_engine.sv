// conv_engine: 8-bit integer convolution engine (CE).
//
// Each accepted beat carries one TAPS-element activation window (3x3 by
// default) and the matching weights, all signed 8-bit. The engine forms the
// dot product and adds it to a 32-bit accumulator. A beat with in_first set
// starts a new output pixel: the accumulator is loaded with the bias instead
// of its old value, so a multi-channel convolution is one beat per input
// channel, the first one flagged. The running sum is presented on acc_out
// one cycle after every beat, with out_valid high for that cycle.
//
// The paper names an "8-bit INT Convolution Engine" and nothing of its
// insides; the window size, the bias-on-first-beat convention and the
// one-beat-per-cycle, one-cycle-latency timing are this design's choices.
module conv_engine #(
  parameter int unsigned TAPS = 9
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     in_first,
  input  logic signed [7:0]        act [TAPS],
  input  logic signed [7:0]        wgt [TAPS],
  input  logic signed [15:0]       bias,
  output logic                     out_valid,
  output logic signed [31:0]       acc_out
);

  logic signed [31:0] dot;

  always_comb begin
    dot = '0;
    for (int i = 0; i < TAPS; i++) begin
      dot = dot + 32'(act[i] * wgt[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_out   <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        acc_out <= (in_first ? 32'(bias) : acc_out) + dot;
      end
    end
  end

endmodule
