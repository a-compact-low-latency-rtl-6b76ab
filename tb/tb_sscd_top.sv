// tb_sscd_top: end-to-end test of the (16,11) decoder at its default
// parameters.
//
// Frames are made by drawing the 11 non-frozen u bits at random and encoding
// x = u * G; the systematic information is then x at the 11 information
// positions. Each code bit is sent as BPSK (0 -> +1, 1 -> -1) through an AWGN
// channel, and the received sample y is quantised to a 5-bit sign-magnitude
// LLR as round(4*y) clipped to +-15 (min-sum decoding does not depend on the
// LLR scale). Frames are given at random gaps and back to back.
//
// Checked for every frame: u_hat, x_hat and info against the bit-by-bit SC
// reference model; for noiseless frames, info against the transmitted
// information bits; the latency of 8 clocks from the load edge to out_valid;
// one result every 8 clocks while frames follow each other. Counted, and a
// failure if never seen: back-to-back frames, frames after an idle gap, G
// saturation, frozen bits forced to 0 against their LLR, frames whose
// channel hard decisions were wrong but which the decoder corrected.
module tb_sscd_top;
  import sscd_ref_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned K = 11;
  localparam int unsigned Q = 5;
  localparam logic [N-1:0] FROZEN = 16'h0117;
  localparam int unsigned INFO_POS [K] = '{3, 5, 6, 7, 9, 10, 11, 12, 13, 14, 15};
  localparam int unsigned N_SNR = 6;
  localparam real EBN0_DB [N_SNR] = '{100.0, 6.0, 4.0, 3.0, 2.0, 1.0};
  localparam int unsigned FRAMES_PER_SNR = 2000;

  logic         clk = 1'b0, rst_n = 1'b0;
  logic         in_valid, in_ready, out_valid;
  logic [Q-1:0] llr_in [N];
  logic [N-1:0] x_hat, u_hat;
  logic [K-1:0] info;
  int unsigned  checks = 0, failures = 0;

  sscd_top dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("%0t: %s", $time, what);
    end
  endtask

  initial begin : watchdog
    repeat (N_SNR * FRAMES_PER_SNR * 20 + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct {
    logic [N-1:0] u_ref;
    logic [N-1:0] x_ref;
    logic [K-1:0] info_tx;
    bit           noiseless;
    bit           ch_err;
    int           snr;
    longint       t_load;
  } exp_t;

  exp_t        expq[$];
  longint      cycle = 0;
  longint      last_out = -1;
  longint      last_load = -1;
  int unsigned n_b2b = 0, n_gap = 0, n_corrected = 0, n_out = 0, n_spaced = 0;
  int unsigned fer_err [N_SNR];
  int unsigned ber_err [N_SNR];
  int unsigned sat_frames = 0;

  always @(posedge clk) cycle <= cycle + 1;

  function automatic real gauss();
    real u1, u2;
    u1 = (real'($urandom) + 1.0) / 4294967297.0;
    u2 = real'($urandom) / 4294967296.0;
    return $sqrt(-2.0 * $ln(u1)) * $cos(6.283185307179586 * u2);
  endfunction

  // output side: compare every result with the queue of expected frames
  always begin
    @(posedge clk);
    #1;
    if (rst_n && out_valid) begin
      exp_t e;
      if (expq.size() == 0) begin
        check(1'b0, "out_valid without a frame");
      end else begin
        e = expq.pop_front();
        n_out++;
        check(u_hat == e.u_ref, $sformatf("u_hat %h exp %h", u_hat, e.u_ref));
        check(x_hat == e.x_ref, $sformatf("x_hat %h exp %h", x_hat, e.x_ref));
        begin
          logic [K-1:0] info_ref;
          for (int k = 0; k < K; k++) info_ref[k] = e.x_ref[INFO_POS[k]];
          check(info == info_ref, "info vs reference");
        end
        if (e.noiseless) check(info == e.info_tx, "noiseless frame decoded wrongly");
        check(cycle - e.t_load == 8, $sformatf("latency %0d clocks", cycle - e.t_load));
        if (info != e.info_tx) fer_err[e.snr]++;
        ber_err[e.snr] += $countones(info ^ e.info_tx);
        if (e.ch_err && info == e.info_tx) n_corrected++;
        if (last_out >= 0 && cycle - last_out < 8)
          check(1'b0, "results closer than 8 clocks");
        if (last_out >= 0 && cycle - last_out == 8) n_spaced++;
        last_out = cycle;
      end
    end
  end

  initial begin
    in_valid = 1'b0;
    for (int i = 0; i < N; i++) llr_in[i] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int snr = 0; snr < N_SNR; snr++) begin
      real sigma;
      // rate 11/16: Es/N0 = Eb/N0 * R, sigma^2 = 1 / (2 Es/N0)
      sigma = $sqrt(1.0 / (2.0 * (11.0 / 16.0) * $pow(10.0, EBN0_DB[snr] / 10.0)));
      for (int unsigned fr = 0; fr < FRAMES_PER_SNR; fr++) begin
        exp_t        e;
        logic [63:0] u, x;
        rllr_t       ch[];
        int unsigned sat0;
        int unsigned gap;
        ch = new[N];
        u  = 64'($urandom) & ~64'(FROZEN) & 64'hFFFF;
        x  = ref_encode(u, N);
        e.ch_err = 1'b0;
        for (int i = 0; i < N; i++) begin
          real y;
          int  qv, mag;
          y  = (x[i] ? -1.0 : 1.0) + ((snr == 0) ? 0.0 : sigma * gauss());
          qv = $rtoi(y * 4.0 + ((y >= 0.0) ? 0.5 : -0.5));
          if (qv > 15) qv = 15;
          if (qv < -15) qv = -15;
          mag = (qv < 0) ? -qv : qv;
          llr_in[i] = {(qv < 0), 4'(mag)};
          ch[i] = from_bits(32'(llr_in[i]), Q);
          if (((qv < 0) ? 1'b1 : 1'b0) != x[i]) e.ch_err = 1'b1;
        end
        sat0 = sat_events;
        e.u_ref = ref_sc(ch, 64'(FROZEN), Q)[N-1:0];
        if (sat_events != sat0) sat_frames++;
        e.x_ref = ref_encode(64'(e.u_ref), N)[N-1:0];
        for (int k = 0; k < K; k++) e.info_tx[k] = x[INFO_POS[k]];
        e.noiseless = (snr == 0);
        e.snr = snr;
        // hand the frame over: wait for in_ready in the middle of a cycle
        in_valid = 1'b1;
        do @(negedge clk); while (!in_ready);
        @(posedge clk);
        #1;
        e.t_load = cycle;
        // a load exactly 8 clocks after the previous one followed it directly
        if (last_load >= 0 && cycle - last_load == 8) n_b2b++; else n_gap++;
        last_load = cycle;
        expq.push_back(e);
        in_valid = 1'b0;
        // mostly back to back, sometimes an idle gap
        gap = (($urandom % 4) == 0) ? ($urandom % 12) : 0;
        repeat (gap) @(posedge clk);
        #1;
      end
    end
    repeat (20) @(posedge clk);
    check(expq.size() == 0, "frames left undecoded");
    check(n_out == N_SNR * FRAMES_PER_SNR, "every frame gave a result");
    for (int snr = 0; snr < N_SNR; snr++)
      $display("Eb/N0 %5.1f dB: FER %0d/%0d  info BER %0d/%0d", EBN0_DB[snr],
               fer_err[snr], FRAMES_PER_SNR, ber_err[snr], FRAMES_PER_SNR * K);
    $display("back-to-back %0d, after idle %0d, 8-clock spacing %0d, saturating frames %0d, frozen bits forced %0d, corrected frames %0d",
             n_b2b, n_gap, n_spaced, sat_frames, frz_forced, n_corrected);
    check(n_b2b > 0, "no back-to-back frame");
    check(n_gap > 0, "no frame after an idle gap");
    check(n_spaced > 0, "no results at full rate");
    check(sat_frames > 0, "no G saturation");
    check(frz_forced > 0, "no frozen bit forced");
    check(n_corrected > 0, "no channel error corrected");
    check(fer_err[0] == 0, "noiseless frames with errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
