// tb_sscd_pe: exhaustive test of the processing element at Q = 5.
// Every La, Lb, s and SEL is applied; the output is compared with the
// integer f/g reference (value, and the sign bit where it decides a bit).
module tb_sscd_pe;
  import sscd_ref_pkg::*;
  localparam int unsigned Q = 5;

  logic [Q-1:0] la, lb, out;
  logic         s, sel;
  int unsigned  checks = 0, failures = 0;
  logic         clk = 1'b0;

  sscd_pe #(.Q(Q)) dut (.la(la), .lb(lb), .s(s), .sel(sel), .out(out));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rllr_t a, b, e, o;
    for (int ia = 0; ia < (1 << Q); ia++)
      for (int ib = 0; ib < (1 << Q); ib++)
        for (int is = 0; is < 2; is++)
          for (int isel = 0; isel < 2; isel++) begin
            la = Q'(ia); lb = Q'(ib); s = is[0]; sel = isel[0];
            #1;
            a = from_bits(32'(la), Q);
            b = from_bits(32'(lb), Q);
            e = sel ? ref_g(a, b, s, Q) : ref_f(a, b);
            o = from_bits(32'(out), Q);
            checks++;
            if (o.v != e.v || o.neg != e.neg) begin
              failures++;
              if (failures < 10)
                $display("mismatch la=%0d lb=%0d s=%0b sel=%0b: got %0d/%0b exp %0d/%0b",
                         a.v, b.v, s, sel, o.v, o.neg, e.v, e.neg);
            end
          end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
