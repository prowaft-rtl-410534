// tmr_voter_tb: self-checking test of the 2-of-3 voter. Three agreeing
// replicas, one replica corrupted in random bits (must be masked and
// flagged), and fully random words against a bitwise majority computed bit
// by bit here.
module tmr_voter_tb;
  localparam int W = 33;
  logic [W-1:0] a, b, c, y;
  logic mismatch;
  int checks = 0, failures = 0;

  tmr_voter #(.W(W)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [W-1:0] v, e;
    for (int t = 0; t < 600; t++) begin
      v = {1'($urandom), 32'($urandom)};
      a = v; b = v; c = v;
      case (t % 4)
        1: a = v ^ (W'(1) << ($urandom % W));
        2: b = v ^ {1'($urandom), 32'($urandom)};
        3: c = ~v;
        default: ;
      endcase
      if (t >= 400) begin
        a = {1'($urandom), 32'($urandom)};
        b = {1'($urandom), 32'($urandom)};
        c = {1'($urandom), 32'($urandom)};
      end
      #1;
      for (int i = 0; i < W; i++) e[i] = (int'(a[i]) + int'(b[i]) + int'(c[i])) >= 2;
      checks++;
      if (y !== e) begin failures++; $display("FAIL t=%0d y=%h e=%h", t, y, e); end
      if (t < 400 && y !== v) begin failures++; $display("FAIL t=%0d not masked", t); end
      checks++;
      if (mismatch !== ((a != b) || (b != c))) begin failures++; $display("FAIL t=%0d mismatch", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
