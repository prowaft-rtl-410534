// recip_divider_tb: self-checking test of the sequential reciprocal. For
// random and corner-case divisors the result must be floor(2^32/d),
// saturated to 32 bits, and done must come exactly 33 cycles after start.
module recip_divider_tb;
  import prowaft_pkg::*;
  logic clk = 0, rst_n = 0;
  logic start = 0;
  q16_t d;
  logic busy, done;
  q16_t q;
  int checks = 0, failures = 0;

  recip_divider dut (.*);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    int cyc;
    d = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      case (t)
        0: d = 0;
        1: d = 1;
        2: d = 65535;
        3: d = 65536;
        4: d = 65537;
        5: d = 32'hFFFF_FFFF;
        6: d = 3 << 16;
        default: d = (t % 5 == 0) ? q16_t'($urandom % 65536) :
                     (t % 2) ? q16_t'($urandom) : q16_t'($urandom % (64 << 16));
      endcase
      e = (d == 0) ? 64'hFFFF_FFFF : (64'h1_0000_0000 / longint'(d));
      if (e > 64'hFFFF_FFFF) e = 64'hFFFF_FFFF;
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (q !== q16_t'(e)) begin failures++; $display("FAIL d=%0d got=%0d exp=%0d", d, q, e); end
      checks++;
      // start is sampled on the first edge, done is seen after the 34th:
      // 33 cycles of iteration.
      if (cyc != 34) begin failures++; $display("FAIL latency %0d", cyc); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
