// sscd_pe_last: F and G functions of one processing element, both outputs
// given out. This is the last-stage ("modified") PE of the tree; the ordinary
// PE (sscd_pe) is this circuit plus the SEL output multiplexers.
//
// Datapath, following the PE diagram of the architecture:
//   * Compare & select: one comparator |La| > |Lb| steers two multiplexers
//     that give max(|La|,|Lb|) and min(|La|,|Lb|).
//   * F (min-sum, Eq. 4):  sign(Lf) = sign(La) ^ sign(Lb),  |Lf| = min.
//   * G (Table I, Lg = Lb + (1-2s)*La): the effective signs are compared by
//     the XOR chain s ^ sign(La) ^ sign(Lb); when they differ the min operand
//     is replaced by its two's complement, so one adder forms max +/- min.
//     sign(Lg) = sign(La)^s if |La| > |Lb|, else sign(Lb).
// The saturation of |Lg| to the largest magnitude (2^(Q-1)-1) when max+min
// overflows is this design's choice; the diagram shows no overflow handling.
//
// Interface: la, lb, lf, lg are Q-bit sign-magnitude LLRs ({sign, magnitude});
// s is the partial-sum bit (for the last stage: the bit just decided from
// lf). Purely combinational.
module sscd_pe_last #(
  parameter int unsigned Q = sscd_pkg::Q
) (
  input  logic [Q-1:0] la,
  input  logic [Q-1:0] lb,
  input  logic         s,
  output logic [Q-1:0] lf,
  output logic [Q-1:0] lg
);

  localparam int unsigned M = Q - 1;              // magnitude width
  localparam logic [M-1:0] MAG_MAX = '1;

  logic         sa, sb;
  logic [M-1:0] ma, mb, mag_max, mag_min;
  logic         a_gt_b, diff_sign;
  logic [M:0]   addend, sum;
  logic [M-1:0] mag_g;

  always_comb begin
    sa = la[Q-1];
    sb = lb[Q-1];
    ma = la[M-1:0];
    mb = lb[M-1:0];

    // compare & select
    a_gt_b  = (ma > mb);
    mag_max = a_gt_b ? ma : mb;
    mag_min = a_gt_b ? mb : ma;

    // F function
    lf = {sa ^ sb, mag_min};

    // G function: add or subtract the smaller magnitude
    diff_sign = s ^ sa ^ sb;
    addend    = diff_sign ? (~{1'b0, mag_min} + 1'b1) : {1'b0, mag_min};
    sum       = {1'b0, mag_max} + addend;
    if (!diff_sign && sum[M]) mag_g = MAG_MAX;    // saturate on overflow
    else                      mag_g = sum[M-1:0];
    lg = {a_gt_b ? (sa ^ s) : sb, mag_g};
  end

endmodule
