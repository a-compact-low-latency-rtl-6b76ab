// sscd_dec: hard decision (DEC) on a last-stage LLR.
//
// The decided bit is the sign of the LLR (1 for a negative LLR), except at a
// frozen position, where it is 0 whatever the LLR says. The forcing of frozen
// bits is part of the SC algorithm; placing it in DEC is this design's choice.
// Q-bit sign-magnitude input; purely combinational.
module sscd_dec #(
  parameter int unsigned Q = sscd_pkg::Q
) (
  input  logic [Q-1:0] llr,
  input  logic         frozen,
  output logic         u_hat
);

  assign u_hat = llr[Q-1] & ~frozen;

endmodule
