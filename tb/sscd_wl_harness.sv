// sscd_wl_harness: drives one sscd_top instance with coded BPSK/AWGN frames
// at Eb/N0 = 3, 4, 5, 6, 7 dB (the range of the BER/FER curves) and checks
// every result against the bit-by-bit SC reference at the same word length.
//
// Q sets the LLR word length of the decoder under test. The received sample
// y is quantised as round(y * 2^(Q-3)) clipped to +-(2^(Q-1)-1). With
// HARD = 1 only the sign of y is kept (magnitude 1): a hard-decision
// decoder. The measured information-bit BER and FER are printed; done rises
// when all frames have been checked. Frames follow each other back to back.
module sscd_wl_harness #(
  parameter int unsigned Q      = 5,
  parameter bit          HARD   = 1'b0,
  parameter int unsigned FRAMES = 2000
) (
  input  logic        clk,
  input  logic        rst_n,
  output int unsigned checks,
  output int unsigned failures,
  output bit          done
);
  import sscd_ref_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned K = 11;
  localparam logic [N-1:0] FROZEN = 16'h0117;
  localparam int unsigned INFO_POS [K] = '{3, 5, 6, 7, 9, 10, 11, 12, 13, 14, 15};
  localparam int unsigned N_SNR = 5;
  localparam int unsigned MAXQ = (1 << (Q - 1)) - 1;

  logic         in_valid, in_ready, out_valid;
  logic [Q-1:0] llr_in [N];
  logic [N-1:0] x_hat, u_hat;
  logic [K-1:0] info;

  sscd_top #(.Q(Q)) dut (.*);

  typedef struct {
    logic [N-1:0] u_ref;
    logic [K-1:0] info_tx;
    int           snr;
  } exp_t;
  exp_t        expq[$];
  int unsigned n_out = 0;
  int unsigned fer [N_SNR];
  int unsigned ber [N_SNR];

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  always begin
    @(posedge clk);
    #1;
    if (rst_n && out_valid && expq.size() > 0) begin
      exp_t e;
      logic [63:0] x_ref;
      logic [K-1:0] info_ref;
      e = expq.pop_front();
      x_ref = ref_encode(64'(e.u_ref), N);
      for (int k = 0; k < K; k++) info_ref[k] = x_ref[INFO_POS[k]];
      checks += 2;
      if (u_hat != e.u_ref || x_hat != x_ref[N-1:0]) failures++;
      if (info != info_ref) failures++;
      if (info != e.info_tx) fer[e.snr]++;
      ber[e.snr] += $countones(info ^ e.info_tx);
      n_out++;
    end
  end

  initial begin
    checks = 0; failures = 0; done = 1'b0;
    in_valid = 1'b0;
    for (int i = 0; i < N; i++) llr_in[i] = '0;
    @(posedge rst_n);
    #1;
    for (int snr = 0; snr < N_SNR; snr++) begin
      real sigma, ebn0;
      ebn0  = 3.0 + snr;
      sigma = $sqrt(1.0 / (2.0 * (11.0 / 16.0) * $pow(10.0, ebn0 / 10.0)));
      for (int unsigned fr = 0; fr < FRAMES; fr++) begin
        exp_t        e;
        logic [63:0] u, x;
        rllr_t       ch[];
        ch = new[N];
        u  = 64'($urandom) & ~64'(FROZEN) & 64'hFFFF;
        x  = ref_encode(u, N);
        for (int i = 0; i < N; i++) begin
          real y;
          int  qv, mag;
          y  = (x[i] ? -1.0 : 1.0) + sigma * gauss();
          if (HARD) qv = (y < 0.0) ? -1 : 1;
          else      qv = $rtoi(y * real'(1 << (Q - 3)) + ((y >= 0.0) ? 0.5 : -0.5));
          if (qv > int'(MAXQ))  qv = MAXQ;
          if (qv < -int'(MAXQ)) qv = -MAXQ;
          mag = (qv < 0) ? -qv : qv;
          llr_in[i] = {(qv < 0), (Q-1)'(mag)};
          ch[i] = from_bits(32'(llr_in[i]), Q);
        end
        e.u_ref = ref_sc(ch, 64'(FROZEN), Q)[N-1:0];
        for (int k = 0; k < K; k++) e.info_tx[k] = x[INFO_POS[k]];
        e.snr = snr;
        in_valid = 1'b1;
        do @(negedge clk); while (!in_ready);
        @(posedge clk);
        #1;
        expq.push_back(e);
        in_valid = 1'b0;
      end
    end
    while (expq.size() > 0) @(posedge clk);
    #2;
    checks++;
    if (n_out != N_SNR * FRAMES) failures++;
    for (int snr = 0; snr < N_SNR; snr++)
      $display("Q=%0d %s Eb/N0 %0d dB: info BER %e  FER %e", Q, HARD ? "hard" : "soft", 3 + snr,
               real'(ber[snr]) / real'(FRAMES * K), real'(fer[snr]) / real'(FRAMES));
    done = 1'b1;
  end
endmodule
