// parity_checker_tb: self-checking test of the parity check. A word written
// with its parity must pass; flipping one random bit, or any odd number of
// bits, must be detected; flipping two bits is (by the nature of parity)
// not detected.
module parity_checker_tb;
  localparam int W = 33;
  logic [W-1:0] data;
  logic stored_parity, error;
  int checks = 0, failures = 0;

  parity_checker #(.W(W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] v;
    int p, i1, i2, i3;
    for (int t = 0; t < 500; t++) begin
      v = {1'($urandom), 32'($urandom)};
      p = 0;
      for (int i = 0; i < W; i++) p ^= int'(v[i]);
      stored_parity = 1'(p);
      data = v; #1;
      checks++; if (error !== 1'b0) begin failures++; $display("FAIL clean t=%0d", t); end
      i1 = $urandom % W; i2 = (i1 + 1 + $urandom % (W - 1)) % W;
      i3 = (i2 + 1) % W; if (i3 == i1) i3 = (i3 + 1) % W;
      data = v ^ (W'(1) << i1); #1;
      checks++; if (error !== 1'b1) begin failures++; $display("FAIL single t=%0d", t); end
      data = v ^ (W'(1) << i1) ^ (W'(1) << i2); #1;
      checks++; if (error !== 1'b0) begin failures++; $display("FAIL double t=%0d", t); end
      data = v ^ (W'(1) << i1) ^ (W'(1) << i2) ^ (W'(1) << i3); #1;
      checks++; if (error !== 1'b1) begin failures++; $display("FAIL triple t=%0d", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
