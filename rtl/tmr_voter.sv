// tmr_voter: 2-of-3 majority voter of a triplicated (TMR) variant.
//
// Votes bit by bit over the three replica outputs, so any fault confined to
// one replica is masked. mismatch is high whenever the replicas disagree in
// any bit, which tells the host that one copy has been upset. Purely
// combinational.
//
// The paper says only that TMR variants are "triplicated logic"; the voter is
// the standard companion of triplication and its form is this design's
// choice.
module tmr_voter #(
  parameter int unsigned W = 33
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y,
  output logic         mismatch
);

  assign y        = (a & b) | (a & c) | (b & c);
  assign mismatch = (a != b) || (a != c);

endmodule
