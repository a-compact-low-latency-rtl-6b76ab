// tb_sscd_pe_tree: the combinational PE tree is driven through the eight
// cycles of a frame by the testbench itself (SEL from the cycle number,
// partial sums from the generator matrix applied to the reference
// decisions), and every decided pair is compared with the bit-by-bit SC
// reference decoder. Random LLR frames of all magnitudes are used.
module tb_sscd_pe_tree;
  import sscd_ref_pkg::*;
  localparam int unsigned N = 16;
  localparam int unsigned LOG2N = 4;
  localparam int unsigned Q = 5;
  localparam logic [N-1:0] FROZEN = 16'h0117;
  localparam int unsigned FRAMES = 3000;

  logic [Q-1:0]     llr [N];
  logic [LOG2N-1:1] sel;
  logic [N-1:2]     ps;
  logic [1:0]       frz, u_pair;
  int unsigned      checks = 0, failures = 0;
  logic             clk = 1'b0;

  sscd_pe_tree dut (.llr(llr), .sel(sel), .ps(ps), .frz(frz), .u_pair(u_pair));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (FRAMES * 20 + 100) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rllr_t       ch[];
    logic [63:0] u_ref, seg, s;
    ch = new[N];
    for (int unsigned fr = 0; fr < FRAMES; fr++) begin
      for (int unsigned i = 0; i < N; i++) begin
        llr[i] = Q'($urandom);
        ch[i]  = from_bits(32'(llr[i]), Q);
      end
      u_ref = ref_sc(ch, 64'(FROZEN), Q);
      for (int unsigned c = 0; c < N / 2; c++) begin
        @(posedge clk);
        for (int unsigned st = 1; st < LOG2N; st++) begin
          int unsigned half, b;
          half    = 1 << st;
          sel[st] = ((c >> (st - 1)) & 1) != 0;
          b       = (2 * c) & ~(2 * half - 1);
          seg     = '0;
          for (int unsigned k = 0; k < half; k++) seg[k] = u_ref[b + k];
          s = ref_encode(seg, half);
          for (int unsigned k = 0; k < half; k++) ps[half + k] = s[k];
        end
        frz = FROZEN[2*c +: 2];
        #1;
        checks++;
        if (u_pair !== u_ref[2*c +: 2]) begin
          failures++;
          if (failures < 10) $display("frame %0d cycle %0d: got %b exp %b", fr, c, u_pair, u_ref[2*c +: 2]);
        end
      end
    end
    $display("saturations in reference: %0d", sat_events);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
