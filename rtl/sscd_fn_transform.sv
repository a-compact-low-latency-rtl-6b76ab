// sscd_fn_transform: systematic re-encoding ("FN transform") of the decoded
// bits, x_hat = u_hat * F^{(x)n}, and extraction of the K information bits.
//
// The transform is the polar encoder itself: n = log2(N) butterfly levels of
// N/2 XORs each, level d doing v[j] ^= v[j + d] for every j whose bit d is 0.
// With the systematic code the information bits are x_hat at the
// non-frozen positions; info[0] is the lowest such position, info[K-1] the
// highest. Purely combinational.
//
// The re-encoding step itself is part of systematic SC decoding as
// published; applying it once to all N decisions in the last cycle, rather
// than per decided pair, and the ascending order of info are this design's.
module sscd_fn_transform #(
  parameter int unsigned  N           = sscd_pkg::N,
  parameter int unsigned  K           = sscd_pkg::K,
  parameter logic [N-1:0] FROZEN_MASK = sscd_pkg::FROZEN_MASK
) (
  input  logic [N-1:0] u_hat,
  output logic [N-1:0] x_hat,
  output logic [K-1:0] info
);

  always_comb begin
    x_hat = u_hat;
    for (int unsigned d = 1; d < N; d = d << 1) begin
      for (int unsigned j = 0; j < N; j++) begin
        if ((j & d) == 0) x_hat[j] = x_hat[j] ^ x_hat[j + d];
      end
    end
  end

  // gather the information positions in ascending order
  always_comb begin
    int unsigned idx;
    idx  = 0;
    info = '0;
    for (int unsigned j = 0; j < N; j++) begin
      if (!FROZEN_MASK[j]) begin
        if (idx < K) info[idx[$clog2(K)-1:0]] = x_hat[j];
        idx++;
      end
    end
  end

endmodule
