// bn_act_unit_tb: self-checking test of the batch-norm/activation unit.
// Random accumulators, scales, shifts and biases, with and without ReLU;
// each result is compared with ((x*scale) >>> shift) + bias, ReLU, and int8
// saturation computed here with 64-bit integers, one cycle after the beat.
module bn_act_unit_tb;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [31:0] x;
  logic signed [7:0]  scale;
  logic [4:0]         shift;
  logic signed [15:0] bias;
  logic               relu;
  logic out_valid;
  logic signed [31:0] y_out;
  int checks = 0, failures = 0;

  bn_act_unit dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    x = 0; scale = 0; shift = 0; bias = 0; relu = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      @(negedge clk);
      in_valid = 1;
      x     = (t % 3 == 0) ? 32'($urandom % 4096) - 2048 : 32'($urandom);
      scale = 8'($urandom);
      shift = 5'($urandom);
      bias  = 16'($urandom % 512) - 16'sd256;
      relu  = 1'($urandom);
      e = (longint'(x) * longint'(scale)) >>> shift;
      e = e + longint'(bias);
      if (relu && e < 0) e = 0;
      if (e > 127) e = 127;
      if (e < -128) e = -128;
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || y_out !== 32'(e)) begin
        failures++;
        $display("FAIL t=%0d x=%0d s=%0d sh=%0d b=%0d r=%0b got=%0d exp=%0d", t, x, scale, shift, bias, relu, y_out, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
