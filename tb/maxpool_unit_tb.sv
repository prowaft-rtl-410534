// maxpool_unit_tb: self-checking test of the max-pooling unit. Random and
// corner-case 3x3 windows, and 2x2 windows padded with -128; each result must be the window maximum,
// sign-extended, exactly one cycle after the beat.
module maxpool_unit_tb;
  localparam int WIN = 9;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [7:0] win [WIN];
  logic out_valid;
  logic signed [31:0] max_out;
  int checks = 0, failures = 0;

  maxpool_unit #(.WIN(WIN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int m;
    for (int i = 0; i < WIN; i++) win[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      in_valid = 1;
      for (int i = 0; i < WIN; i++) win[i] = 8'($urandom);
      if (t % 3 == 0 || t < 3) for (int i = 4; i < WIN; i++) win[i] = -128;
      if (t == 0) for (int i = 0; i < WIN; i++) win[i] = -128;
      if (t == 1) begin win[0] = -5; win[1] = -3; win[2] = -100; win[3] = -128; end
      if (t == 2) begin win[0] = 0; win[1] = 0; win[2] = 0; win[3] = 127; end
      m = -1000;
      for (int i = 0; i < WIN; i++) if (int'(win[i]) > m) m = int'(win[i]);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid || max_out !== 32'(m)) begin
        failures++;
        $display("FAIL t=%0d got=%0d exp=%0d v=%0b", t, max_out, m, out_valid);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
