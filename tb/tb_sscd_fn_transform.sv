// tb_sscd_fn_transform: all 2^16 inputs of the FN transform are compared
// with the generator-matrix product x_j = XOR of u_i over all i covering j,
// and the information output with x_hat at the positions
// {3,5,6,7,9,10,11,12,13,14,15} in that order.
module tb_sscd_fn_transform;
  import sscd_ref_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned K = 11;
  localparam int unsigned INFO_POS [K] = '{3, 5, 6, 7, 9, 10, 11, 12, 13, 14, 15};

  logic [N-1:0] u_hat, x_hat;
  logic [K-1:0] info;
  int unsigned  checks = 0, failures = 0;
  logic         clk = 1'b0;

  sscd_fn_transform dut (.u_hat(u_hat), .x_hat(x_hat), .info(info));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] x_exp;
    for (int v = 0; v < (1 << N); v++) begin
      u_hat = N'(v);
      #1;
      x_exp = ref_encode(64'(u_hat), N);
      checks++;
      if (x_hat !== x_exp[N-1:0]) begin
        failures++;
        if (failures < 10) $display("x mismatch u=%h got %h exp %h", u_hat, x_hat, x_exp[N-1:0]);
      end
      for (int k = 0; k < K; k++) begin
        checks++;
        if (info[k] !== x_exp[INFO_POS[k]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
