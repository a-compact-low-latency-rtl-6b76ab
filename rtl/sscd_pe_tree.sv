// sscd_pe_tree: the whole PE tree of the decoder, evaluated in one clock.
//
// For N = 16 the tree has 8 PEs in stage 3, 4 in stage 2, 2 in stage 1 and
// the modified PE in stage 0, followed by two DEC blocks. All stages are
// combinational, so one pass through the tree decides two bits,
// u_hat[2c] and u_hat[2c+1], per clock (the "F-F-F-F-G" schedule).
//
// Wiring (natural order, x = u * F^{(x)n}): PE k of stage st takes
// La = L[k] and Lb = L[k + 2^st] of the 2^(st+1) LLRs entering that stage,
// so the F output is the LLR of the upper half-code and the G output that of
// the lower half once its partial sum is known. The last PE gives F and G at
// once; the bit decided from F is fed straight to the G input (s), which is
// the modification of the last stage.
//
// Internal nodes are numbered as a heap: stage st drives nodes
// 2^st .. 2^(st+1)-1, the channel LLRs sit at nodes N .. 2N-1. The partial
// sum input ps uses the same numbers (ps[2^st + k] is the s of PE k of stage
// st), sel[st] is the SEL of every PE of stage st.
//
// Interface: llr[i] is the Q-bit sign-magnitude LLR of code bit x_i; frz[0]
// and frz[1] mark u_hat[2c] and u_hat[2c+1] frozen. Purely combinational.
module sscd_pe_tree #(
  parameter int unsigned N     = sscd_pkg::N,
  parameter int unsigned Q     = sscd_pkg::Q,
  parameter int unsigned LOG2N = $clog2(N)
) (
  input  logic [Q-1:0]       llr [N],
  input  logic [LOG2N-1:1]   sel,
  input  logic [N-1:2]       ps,
  input  logic [1:0]         frz,
  output logic [1:0]         u_pair
);

  logic [Q-1:0] node [2:2*N-1];
  logic [Q-1:0] lf, lg;

  for (genvar i = 0; i < N; i++) begin : g_in
    assign node[N + i] = llr[i];
  end

  for (genvar st = LOG2N - 1; st >= 1; st--) begin : g_stage
    for (genvar k = 0; k < (1 << st); k++) begin : g_pe
      sscd_pe #(.Q(Q)) u_pe (
        .la  (node[(2 << st) + k]),
        .lb  (node[(2 << st) + k + (1 << st)]),
        .s   (ps[(1 << st) + k]),
        .sel (sel[st]),
        .out (node[(1 << st) + k])
      );
    end
  end

  // stage 0: modified PE and the two decisions
  sscd_pe_last #(.Q(Q)) u_pe_last (
    .la (node[2]),
    .lb (node[3]),
    .s  (u_pair[0]),
    .lf (lf),
    .lg (lg)
  );

  sscd_dec #(.Q(Q)) u_dec0 (.llr(lf), .frozen(frz[0]), .u_hat(u_pair[0]));
  sscd_dec #(.Q(Q)) u_dec1 (.llr(lg), .frozen(frz[1]), .u_hat(u_pair[1]));

endmodule
