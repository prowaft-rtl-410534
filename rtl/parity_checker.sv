// parity_checker: the lightweight parity check used for fault detection.
//
// Compares the even parity of a W-bit word with a parity bit stored when the
// word was written. error is high when they differ, that is when an odd
// number of bits has flipped since. Purely combinational.
//
// The paper states that faults are detected by a lightweight parity check;
// one parity bit per configuration frame is this design's choice.
module parity_checker #(
  parameter int unsigned W = 33
) (
  input  logic [W-1:0] data,
  input  logic         stored_parity,
  output logic         error
);

  assign error = (^data) ^ stored_parity;

endmodule
