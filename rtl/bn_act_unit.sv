// bn_act_unit: batch-norm and activation unit (BAU).
//
// Takes a 32-bit convolution accumulator and applies a folded batch
// normalisation y = ((x * scale) >>> shift) + bias, an optional ReLU, and
// saturation to signed 8 bits, the input format of the next 8-bit layer.
// The result appears sign-extended on y_out one cycle after the beat.
//
// The paper names a "BatchNorm-Activation Unit" only; the folded
// scale/shift/bias form, ReLU as the activation and int8 saturation are this
// design's choices.
module bn_act_unit (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               in_valid,
  input  logic signed [31:0] x,
  input  logic signed [7:0]  scale,
  input  logic [4:0]         shift,
  input  logic signed [15:0] bias,
  input  logic               relu,
  output logic               out_valid,
  output logic signed [31:0] y_out
);

  logic signed [47:0] prod, shifted, biased;
  logic signed [7:0]  sat;

  always_comb begin
    prod    = 48'(x) * 48'(scale);
    shifted = prod >>> shift;
    biased  = shifted + 48'(bias);
    if (relu && biased < 0) biased = '0;
    if (biased > 48'sd127)       sat = 8'sd127;
    else if (biased < -48'sd128) sat = -8'sd128;
    else                         sat = biased[7:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y_out     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) y_out <= 32'(sat);
    end
  end

endmodule
