// sscd_top: (16,11) soft-decision systematic successive cancellation polar
// decoder, deciding two bits per clock so that one frame takes 8 clocks.
//
// Blocks: sscd_regs (LLR, decoded-bit and output registers), sscd_ctrl
// (control FSM, SEL and partial sums), sscd_pe_tree (8 + 4 + 2 PEs, the
// modified last PE and two DECs, all in one clock), sscd_fn_transform
// (x_hat = u_hat * F^{(x)n} and information-bit extraction).
//
// Interface:
//   llr_in[i]  Q-bit sign-magnitude LLR of code bit x_i (bit Q-1 = sign,
//              negative means bit 1), taken when in_valid && in_ready.
//   in_ready   1 when idle and in the last cycle of a frame (frames may be
//              given back to back, one every N/2 clocks).
//   out_valid  one-cycle pulse N/2 = 8 clock edges after the frame was
//              taken; x_hat (all N re-encoded bits), info (the K systematic
//              information bits, lowest position first) and u_hat (the SC decisions)
//              follow; x_hat and info stay valid until the next frame ends,
//              u_hat only in the out_valid cycle.
// There is no output back-pressure: a result must be taken in the cycle
// out_valid is 1 or before the next frame overwrites it.
//
// The block split, the two-bits-per-clock schedule and the 8-clock latency
// follow the published architecture; the handshake, the reset and the
// output register holding both x_hat and info are this design's choices.
module sscd_top #(
  parameter int unsigned  N           = sscd_pkg::N,
  parameter int unsigned  K           = sscd_pkg::K,
  parameter int unsigned  Q           = sscd_pkg::Q,
  parameter logic [N-1:0] FROZEN_MASK = sscd_pkg::FROZEN_MASK
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         in_valid,
  output logic         in_ready,
  input  logic [Q-1:0] llr_in [N],
  output logic         out_valid,
  output logic [N-1:0] x_hat,
  output logic [K-1:0] info,
  output logic [N-1:0] u_hat
);

  localparam int unsigned LOG2N = $clog2(N);

  logic             load, step, out_we;
  logic [LOG2N-2:0] pos;
  logic [LOG2N-1:1] sel;
  logic [N-1:2]     ps;
  logic [1:0]       frz, u_pair;
  logic [Q-1:0]     llr_q [N];
  logic [N-1:0]     u_q, u_full, x_next;
  logic [K-1:0]     info_next;

  sscd_ctrl #(.N(N), .FROZEN_MASK(FROZEN_MASK)) u_ctrl (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (in_valid),
    .in_ready  (in_ready),
    .load      (load),
    .step      (step),
    .pos       (pos),
    .out_we    (out_we),
    .out_valid (out_valid),
    .u_q       (u_q),
    .sel       (sel),
    .ps        (ps),
    .frz       (frz)
  );

  sscd_regs #(.N(N), .K(K), .Q(Q)) u_regs (
    .clk    (clk),
    .load   (load),
    .llr_in (llr_in),
    .llr_q  (llr_q),
    .step   (step),
    .pos    (pos),
    .u_pair (u_pair),
    .u_q    (u_q),
    .u_full (u_full),
    .out_we (out_we),
    .x_in   (x_next),
    .x_q    (x_hat),
    .info_in(info_next),
    .info_q (info)
  );

  sscd_pe_tree #(.N(N), .Q(Q)) u_tree (
    .llr    (llr_q),
    .sel    (sel),
    .ps     (ps),
    .frz    (frz),
    .u_pair (u_pair)
  );

  sscd_fn_transform #(.N(N), .K(K), .FROZEN_MASK(FROZEN_MASK)) u_fn (
    .u_hat (u_full),
    .x_hat (x_next),
    .info  (info_next)
  );

  // u_hat shows the decoded-bit register; it is complete in the out_valid
  // cycle and is overwritten pair by pair while the next frame decodes.
  assign u_hat = u_q;

  // each accepted frame is in its last decoding cycle N/2 - 1 clocks after
  // the load edge and gives out_valid in the cycle after that
  a_latency : assert property (@(posedge clk) disable iff (!rst_n)
                               load |=> ##(N/2-1) out_we ##1 out_valid);

endmodule
