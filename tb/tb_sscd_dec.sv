// tb_sscd_dec: exhaustive test of the hard decision: bit = 1 for a
// negative LLR, 0 for a positive one, and always 0 at a frozen position.
module tb_sscd_dec;
  localparam int unsigned Q = 5;

  logic [Q-1:0] llr;
  logic         frozen, u_hat;
  int unsigned  checks = 0, failures = 0;
  logic         clk = 1'b0;

  sscd_dec #(.Q(Q)) dut (.llr(llr), .frozen(frozen), .u_hat(u_hat));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic exp_bit;
    for (int i = 0; i < (1 << Q); i++)
      for (int f = 0; f < 2; f++) begin
        llr = Q'(i); frozen = f[0];
        #1;
        // value of the word: negative when the top bit is set
        exp_bit = (f == 0) && (i >= (1 << (Q - 1)));
        checks++;
        if (u_hat !== exp_bit) begin
          failures++;
          $display("mismatch llr=%0h frozen=%0b got %0b", llr, frozen, u_hat);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
