// conv_engine_tb: self-checking test of the 8-bit convolution engine.
// Drives random 3x3 windows in groups of 1 to 4 beats (one beat per input
// channel, bias loaded on the first) and compares every output with a
// reference sum computed here. Checks one-cycle latency: out_valid must be
// high exactly in the cycle after each input beat.
module conv_engine_tb;
  localparam int TAPS = 9;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_first = 0;
  logic signed [7:0] act [TAPS], wgt [TAPS];
  logic signed [15:0] bias;
  logic out_valid;
  logic signed [31:0] acc_out;
  int checks = 0, failures = 0;

  conv_engine #(.TAPS(TAPS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint exp_acc;
    int     beats;
    for (int i = 0; i < TAPS; i++) begin act[i] = 0; wgt[i] = 0; end
    bias = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    exp_acc = 0;
    for (int g = 0; g < 300; g++) begin
      beats = 1 + ($urandom % 4);
      for (int b = 0; b < beats; b++) begin
        @(negedge clk);
        in_valid = 1;
        in_first = (b == 0);
        bias = 16'($urandom);
        for (int i = 0; i < TAPS; i++) begin
          act[i] = 8'($urandom);
          wgt[i] = 8'($urandom);
        end
        if (g == 0) begin  // extreme values
          for (int i = 0; i < TAPS; i++) begin act[i] = -128; wgt[i] = -128; end
        end
        if (b == 0) exp_acc = longint'(bias);
        for (int i = 0; i < TAPS; i++) exp_acc += longint'(act[i]) * longint'(wgt[i]);
        @(negedge clk);
        in_valid = 0;
        checks++;
        if (!out_valid || acc_out !== 32'(exp_acc)) begin
          failures++;
          $display("FAIL g=%0d b=%0d valid=%0b got=%0d exp=%0d", g, b, out_valid, acc_out, exp_acc);
        end
        @(negedge clk);
        checks++;
        if (out_valid) begin failures++; $display("FAIL valid not a pulse"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
