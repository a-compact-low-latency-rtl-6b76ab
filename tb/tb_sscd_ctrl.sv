// tb_sscd_ctrl: checks the control FSM cycle by cycle against the schedule:
// in_ready only when idle or in the last cycle, eight decoding cycles per
// frame, SEL patterns FFFFGGGG / FFGGFFGG / FGFGFGFG for stages 3 / 2 / 1,
// frozen flags of the current pair, partial sums equal to the generator
// matrix applied to the upper half of each stage's sub-code, out_valid
// eight edges after the load, back-to-back frames and idle gaps, and reset.
module tb_sscd_ctrl;
  import sscd_ref_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned LOG2N = 4;
  localparam logic [N-1:0] FROZEN = 16'h0117;

  logic             clk = 1'b0, rst_n = 1'b0;
  logic             in_valid, in_ready, load, step, out_we, out_valid;
  logic [LOG2N-2:0] pos;
  logic [N-1:0]     u_q;
  logic [LOG2N-1:1] sel;
  logic [N-1:2]     ps;
  logic [1:0]       frz;
  int unsigned      checks = 0, failures = 0;
  int unsigned      n_b2b = 0, n_gap = 0;

  sscd_ctrl dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("%0t: %s", $time, what);
    end
  endtask

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected model: counter of the cycle within the frame, -1 when idle
  int c_exp = -1;

  bit was_last = 1'b0;

  initial begin
    in_valid = 1'b0;
    u_q      = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b1;
    for (int unsigned cyc = 0; cyc < 8000; cyc++) begin
      // drive inputs for this cycle
      in_valid = ($urandom % 3) != 0;
      u_q      = N'($urandom);
      #1;
      // combinational checks
      check(in_ready == (c_exp < 0 || c_exp == 7), "in_ready");
      check(load == (in_valid && in_ready), "load");
      check(step == (c_exp >= 0), "step");
      if (c_exp >= 0) begin
        logic [63:0] seg, s;
        check(pos == c_exp[LOG2N-2:0], "pos");
        check(out_we == (c_exp == 7), "out_we");
        check(frz == FROZEN[2*c_exp +: 2], "frz");
        for (int unsigned st = 1; st < LOG2N; st++) begin
          int unsigned half, b;
          half = 1 << st;
          check(sel[st] == c_exp[st-1], $sformatf("sel[%0d] in cycle %0d", st, c_exp));
          if (sel[st]) begin
            b   = (2 * c_exp) & ~(2 * half - 1);
            seg = '0;
            for (int unsigned k = 0; k < half; k++) seg[k] = u_q[b + k];
            s = ref_encode(seg, half);
            for (int unsigned k = 0; k < half; k++)
              check(ps[half + k] == s[k], $sformatf("ps stage %0d pe %0d cycle %0d", st, k, c_exp));
          end
        end
      end else begin
        check(out_we == 1'b0, "out_we idle");
      end
      was_last = (c_exp == 7);
      @(posedge clk);
      // model update at the edge
      if (in_valid && (c_exp < 0 || c_exp == 7)) begin
        if (c_exp == 7) n_b2b++; else n_gap++;
        c_exp = 0;

      end else if (c_exp == 7) begin
        c_exp = -1;
      end else if (c_exp >= 0) begin
        c_exp++;
      end
      #1;
      check(out_valid == was_last, "out_valid one cycle after the last decoding cycle");
    end
    // latency: one load from idle, count edges to out_valid
    in_valid = 1'b0;
    repeat (12) @(posedge clk);
    #1 in_valid = 1'b1;
    @(posedge clk);
    #1 in_valid = 1'b0;
    begin
      int unsigned lat = 0;
      while (!out_valid && lat < 50) begin @(posedge clk); #1; lat++; end
      check(lat == 8, $sformatf("latency %0d clocks, expected 8", lat));
      @(posedge clk); #1;
      check(!out_valid, "out_valid is one cycle");
    end
    // reset in the middle of a frame
    in_valid = 1'b1;
    @(posedge clk); #1 in_valid = 1'b0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1'b0;
    #1 check(in_ready && !step && !out_valid, "reset returns to idle");
    rst_n = 1'b1;
    check(n_b2b > 0, "back-to-back frames seen");
    check(n_gap > 0, "frames after idle seen");
    $display("back-to-back loads %0d, loads from idle %0d", n_b2b, n_gap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
