// tb_sscd_regs: random load / step / out_we sequences against a plain model
// of the three registers: the LLR register must hold its frame between
// loads, each step must write exactly the two bits at 2*pos, u_full must show
// the current pair merged in, and the output register must change only on
// out_we.
module tb_sscd_regs;
  localparam int unsigned N = 16;
  localparam int unsigned K = 11;
  localparam int unsigned Q = 5;

  logic         clk = 1'b0;
  logic         load, step, out_we;
  logic [Q-1:0] llr_in [N];
  logic [Q-1:0] llr_q  [N];
  logic [2:0]   pos;
  logic [1:0]   u_pair;
  logic [N-1:0] u_q, u_full, x_in, x_q;
  logic [K-1:0] info_in, info_q;
  int unsigned  checks = 0, failures = 0;

  sscd_regs dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("%0t: %s", $time, what);
    end
  endtask

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [Q-1:0] m_llr [N];
    logic [N-1:0] m_u, m_x;
    logic [K-1:0] m_info;
    // initialise every register once
    load = 1'b1; step = 1'b0; out_we = 1'b1; pos = '0; u_pair = '0;
    for (int i = 0; i < N; i++) llr_in[i] = Q'($urandom);
    x_in = N'($urandom); info_in = K'($urandom);
    @(posedge clk); #1;
    m_llr = llr_in; m_x = x_in; m_info = info_in;
    step = 1'b1;
    for (int p = 0; p < 8; p++) begin
      pos = 3'(p); u_pair = 2'($urandom);
      @(posedge clk); #1;
    end
    m_u = u_q;
    for (int unsigned cyc = 0; cyc < 5000; cyc++) begin
      load = ($urandom % 4) == 0; step = ($urandom % 2) == 0; out_we = ($urandom % 5) == 0;
      pos  = 3'($urandom); u_pair = 2'($urandom);
      for (int i = 0; i < N; i++) llr_in[i] = Q'($urandom);
      x_in = N'($urandom); info_in = K'($urandom);
      #1;
      begin
        logic [N-1:0] full_exp;
        full_exp = m_u;
        full_exp[2*pos] = u_pair[0];
        full_exp[2*pos+1] = u_pair[1];
        check(u_full == full_exp, "u_full");
        @(posedge clk); #1;
        if (load) m_llr = llr_in;
        if (step) m_u = full_exp;
        if (out_we) begin m_x = x_in; m_info = info_in; end
      end
      check(llr_q == m_llr, "llr register");
      check(u_q == m_u, "decoded-bit register");
      check(x_q == m_x && info_q == m_info, "output register");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
