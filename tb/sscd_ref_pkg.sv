// sscd_ref_pkg: reference models used by the decoder testbenches.
//
// They are written independently of the RTL structure:
//   * LLRs are held as a signed integer plus a sign flag (the flag only
//     matters for a zero value, where the sign-magnitude hardware still has a
//     sign bit that DEC reads).
//   * f and g follow Eq. 4 and Table I in integer arithmetic, with the
//     magnitude saturated at 2^(Q-1)-1.
//   * the SC reference decodes one bit at a time, recomputing every stage for
//     every bit; partial sums come from the generator matrix
//     G[i][j] = 1 iff (i & j) == j, not from butterflies.
package sscd_ref_pkg;

  typedef struct {
    int v;      // value, -MAX .. MAX
    bit neg;    // sign bit as the hardware holds it
  } rllr_t;

  int unsigned sat_events = 0;   // G results clipped by saturation
  int unsigned frz_forced = 0;   // frozen bits whose LLR pointed to 1

  function automatic rllr_t from_bits(logic [31:0] w, int unsigned q);
    rllr_t r;
    int mag;
    mag   = int'(w & ((32'd1 << (q - 1)) - 1));
    r.neg = w[q-1];
    r.v   = r.neg ? -mag : mag;
    return r;
  endfunction

  function automatic logic [31:0] to_bits(rllr_t r, int unsigned q);
    int mag;
    mag = (r.v < 0) ? -r.v : r.v;
    return (32'(r.neg) << (q - 1)) | 32'(mag);
  endfunction

  function automatic int iabs(int x);
    return (x < 0) ? -x : x;
  endfunction

  function automatic rllr_t ref_f(rllr_t a, rllr_t b);
    rllr_t r;
    int m;
    m     = (iabs(a.v) < iabs(b.v)) ? iabs(a.v) : iabs(b.v);
    r.neg = a.neg ^ b.neg;
    r.v   = r.neg ? -m : m;
    return r;
  endfunction

  function automatic rllr_t ref_g(rllr_t a, rllr_t b, bit s, int unsigned q);
    rllr_t r;
    int mx;
    mx  = (1 << (q - 1)) - 1;
    r.v = b.v + (s ? -a.v : a.v);
    if (r.v > mx)  begin r.v = mx;  sat_events++; end
    if (r.v < -mx) begin r.v = -mx; sat_events++; end
    if (r.v == 0) r.neg = b.neg;
    else          r.neg = (r.v < 0);
    return r;
  endfunction

  // x = u * G,  G[i][j] = 1 iff i covers j (lower-triangular kernel, natural order)
  function automatic logic [63:0] ref_encode(logic [63:0] u, int unsigned len);
    logic [63:0] x;
    x = '0;
    for (int unsigned j = 0; j < len; j++)
      for (int unsigned i = 0; i < len; i++)
        if ((i & j) == j) x[j] = x[j] ^ u[i];
    return x;
  endfunction

  // Bit-by-bit SC decoder on n stages. ch[k] are the channel LLRs.
  function automatic logic [63:0] ref_sc(rllr_t ch[], logic [63:0] frozen,
                                         int unsigned q);
    int unsigned n_len;
    logic [63:0] u;
    n_len = ch.size();
    u = '0;
    for (int unsigned i = 0; i < n_len; i++) begin
      rllr_t cur[];
      rllr_t nxt[];
      int unsigned half, b;
      logic [63:0] seg, s;
      cur  = ch;
      half = n_len / 2;
      while (half >= 1) begin
        nxt = new[half];
        b   = i & ~(2 * half - 1);
        if ((i & half) == 0) begin
          for (int unsigned k = 0; k < half; k++) nxt[k] = ref_f(cur[k], cur[k + half]);
        end else begin
          seg = '0;
          for (int unsigned k = 0; k < half; k++) seg[k] = u[b + k];
          s = ref_encode(seg, half);
          for (int unsigned k = 0; k < half; k++)
            nxt[k] = ref_g(cur[k], cur[k + half], s[k], q);
        end
        cur  = nxt;
        half = half / 2;
      end
      if (frozen[i] && cur[0].neg) frz_forced++;
      u[i] = frozen[i] ? 1'b0 : cur[0].neg;
    end
    return u;
  endfunction

endpackage
