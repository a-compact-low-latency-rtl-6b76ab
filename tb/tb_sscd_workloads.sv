// tb_sscd_workloads: the decoder configurations whose error rates are
// evaluated, run side by side on the same Eb/N0 points (3..7 dB):
//   soft decision at Q = 4, 5, 6 and 10 bits, and hard decision (sign only).
// Each instance is checked bit-exactly against the SC reference model at its
// own word length; the measured BER/FER are printed for comparison with the
// published curves.
module tb_sscd_workloads;
  localparam int unsigned FRAMES = 10000;
  localparam int unsigned NI = 5;

  logic        clk = 1'b0, rst_n = 1'b0;
  int unsigned chk [NI];
  int unsigned fail [NI];
  bit          dn [NI];

  always #5 clk = ~clk;

  sscd_wl_harness #(.Q(5),  .HARD(1'b0), .FRAMES(FRAMES)) u_q5  (.clk, .rst_n, .checks(chk[0]), .failures(fail[0]), .done(dn[0]));
  sscd_wl_harness #(.Q(4),  .HARD(1'b0), .FRAMES(FRAMES)) u_q4  (.clk, .rst_n, .checks(chk[1]), .failures(fail[1]), .done(dn[1]));
  sscd_wl_harness #(.Q(6),  .HARD(1'b0), .FRAMES(FRAMES)) u_q6  (.clk, .rst_n, .checks(chk[2]), .failures(fail[2]), .done(dn[2]));
  sscd_wl_harness #(.Q(10), .HARD(1'b0), .FRAMES(FRAMES)) u_q10 (.clk, .rst_n, .checks(chk[3]), .failures(fail[3]), .done(dn[3]));
  sscd_wl_harness #(.Q(5),  .HARD(1'b1), .FRAMES(FRAMES)) u_hd  (.clk, .rst_n, .checks(chk[4]), .failures(fail[4]), .done(dn[4]));

  function automatic int unsigned total(int unsigned a [NI]);
    int unsigned t = 0;
    foreach (a[i]) t += a[i];
    return t;
  endfunction

  initial begin : watchdog
    repeat (5 * FRAMES * 12 + 1000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), total(fail) + 1);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    wait (dn[0] && dn[1] && dn[2] && dn[3] && dn[4]);
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), total(fail));
    $finish;
  end
endmodule
