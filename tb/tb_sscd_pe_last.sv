// tb_sscd_pe_last: exhaustive test of the last-stage PE at Q = 5: both the
// F and the G output are compared with the integer reference for every
// La, Lb and s.
module tb_sscd_pe_last;
  import sscd_ref_pkg::*;
  localparam int unsigned Q = 5;

  logic [Q-1:0] la, lb, lf, lg;
  logic         s;
  int unsigned  checks = 0, failures = 0;
  logic         clk = 1'b0;

  sscd_pe_last #(.Q(Q)) dut (.la(la), .lb(lb), .s(s), .lf(lf), .lg(lg));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rllr_t a, b, ef, eg, of, og;
    for (int ia = 0; ia < (1 << Q); ia++)
      for (int ib = 0; ib < (1 << Q); ib++)
        for (int is = 0; is < 2; is++) begin
          la = Q'(ia); lb = Q'(ib); s = is[0];
          #1;
          a  = from_bits(32'(la), Q);
          b  = from_bits(32'(lb), Q);
          ef = ref_f(a, b);
          eg = ref_g(a, b, s, Q);
          of = from_bits(32'(lf), Q);
          og = from_bits(32'(lg), Q);
          checks += 2;
          if (of.v != ef.v || of.neg != ef.neg) begin
            failures++;
            if (failures < 10) $display("F mismatch la=%0d lb=%0d", a.v, b.v);
          end
          if (og.v != eg.v || og.neg != eg.neg) begin
            failures++;
            if (failures < 10) $display("G mismatch la=%0d lb=%0d s=%0b: got %0d exp %0d",
                                        a.v, b.v, s, og.v, eg.v);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
