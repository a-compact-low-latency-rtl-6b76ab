// sscd_ctrl: control FSM of the decoder. It schedules the PE tree and the
// registers and forms the SEL and partial-sum (s) signals.
//
// States: ST_IDLE (no frame) and ST_DECODE. A frame is accepted when
// in_valid and in_ready are both 1 at a clock edge (load = 1); in_ready is 1
// in ST_IDLE and in the last decoding cycle, so frames can follow each other
// without a gap. In ST_DECODE the cycle counter c runs 0 .. N/2-1 and the tree
// decides u_hat[2c] and u_hat[2c+1] in cycle c (step = 1 writes them).
//
// Schedule (for N = 16, the proposed schedule of the architecture):
//   stage 3 SEL = c[2]  ->  F F F F G G G G
//   stage 2 SEL = c[1]  ->  F F G G F F G G
//   stage 1 SEL = c[0]  ->  F G F G F G F G
//   stage 0 always gives F and G.
// The partial sum of PE k in stage st is bit k of the re-encoding
// u_hat[b .. b+2^st-1] * F^{(x)st}, where b = 2c with its st+1 low bits
// cleared: the upper half of the sub-code the stage is working on, already
// decided when the stage is in G mode. It is formed combinationally from the
// decoded-bit register u_q; ps uses the heap numbering of sscd_pe_tree.
//
// In the last cycle out_we = 1 loads the output register; out_valid is 1 in
// the cycle after it, i.e. N/2 = 8 clock edges after the edge that loaded the
// frame. Reset (rst_n, asynchronous, active low) returns to ST_IDLE; frozen
// flags of the current pair come from FROZEN_MASK.
module sscd_ctrl #(
  parameter int unsigned  N           = sscd_pkg::N,
  parameter logic [N-1:0] FROZEN_MASK = sscd_pkg::FROZEN_MASK,
  parameter int unsigned  LOG2N       = $clog2(N)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  output logic             load,
  output logic             step,
  output logic [LOG2N-2:0] pos,
  output logic             out_we,
  output logic             out_valid,
  input  logic [N-1:0]     u_q,
  output logic [LOG2N-1:1] sel,
  output logic [N-1:2]     ps,
  output logic [1:0]       frz
);

  import sscd_pkg::ctrl_state_e;
  import sscd_pkg::ST_IDLE;
  import sscd_pkg::ST_DECODE;

  localparam logic [LOG2N-2:0] LAST = '1;

  ctrl_state_e      state;
  logic [LOG2N-2:0] cnt;
  logic             last;

  assign last     = (state == ST_DECODE) && (cnt == LAST);
  assign in_ready = (state == ST_IDLE) || last;
  assign load     = in_valid && in_ready;
  assign step     = (state == ST_DECODE);
  assign out_we   = last;
  assign pos      = cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= ST_IDLE;
      cnt       <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= last;
      if (load) begin
        state <= ST_DECODE;
        cnt   <= '0;
      end else if (last) begin
        state <= ST_IDLE;
        cnt   <= '0;
      end else if (state == ST_DECODE) begin
        cnt <= cnt + 1'b1;
      end
    end
  end

  // SEL of stage st is bit st-1 of the cycle counter
  always_comb begin
    for (int unsigned st = 1; st < LOG2N; st++) sel[st] = cnt[st-1];
  end

  // frozen flags of the pair decided in this cycle
  always_comb begin
    frz = FROZEN_MASK[{cnt, 1'b0} +: 2];
  end

  // partial sums
  always_comb begin
    logic [N-1:0] seg;
    int unsigned  base;
    ps = '0;
    for (int unsigned st = 1; st < LOG2N; st++) begin
      base = (int'(cnt) * 2) & ~((2 << st) - 1);
      seg  = u_q >> base;
      for (int unsigned d = 1; d < (1 << st); d = d << 1) begin
        for (int unsigned j = 0; j < (1 << st); j++) begin
          if ((j & d) == 0) seg[j] = seg[j] ^ seg[j + d];
        end
      end
      for (int unsigned k = 0; k < (1 << st); k++) ps[(1 << st) + k] = seg[k];
    end
  end

  // frames are only accepted when the decoder can take them
  a_load_ready : assert property (@(posedge clk) disable iff (!rst_n)
                                  load |-> in_ready);
  a_cnt_idle : assert property (@(posedge clk) disable iff (!rst_n)
                                (state == ST_IDLE) |-> (cnt == '0));

endmodule
