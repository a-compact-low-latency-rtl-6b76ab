// sscd_pe: processing element of the decoder tree (stages n-1 .. 1).
//
// One F and one G function are built (sscd_pe_last) and the SEL signal
// chooses which of them drives the output, as in Table I of the PE:
//   SEL = 0 : Out = sign(La*Lb) * min(|La|,|Lb|)
//   SEL = 1 : Out = Lb + La  (s = 0)   or   Lb - La  (s = 1)
// SEL and the partial sum s come from the control FSM. Q-bit sign-magnitude
// LLRs; purely combinational.
module sscd_pe #(
  parameter int unsigned Q = sscd_pkg::Q
) (
  input  logic [Q-1:0] la,
  input  logic [Q-1:0] lb,
  input  logic         s,
  input  logic         sel,
  output logic [Q-1:0] out
);

  logic [Q-1:0] lf, lg;

  sscd_pe_last #(.Q(Q)) u_fg (
    .la (la),
    .lb (lb),
    .s  (s),
    .lf (lf),
    .lg (lg)
  );

  // output multiplexers of the sign and of the magnitude
  assign out = sel ? lg : lf;

endmodule
