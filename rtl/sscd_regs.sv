// sscd_regs: the registers of the decoder.
//   * LLR register: N Q-bit channel LLRs, loaded when load = 1 and held for
//     the N/2 cycles of the frame while the PE tree reads them.
//   * decoded-bit register u_q: when step = 1 the two bits decided in cycle
//     pos are written at positions 2*pos and 2*pos+1.
//   * u_full: u_q with the pair of the current cycle merged in, so that the
//     FN transform sees all N decisions in the last cycle.
//   * output register x_q / info_q: the re-encoded codeword and its K
//     information bits, loaded when out_we = 1 and held until the next
//     frame ends.
// The data registers have no reset (nothing reads them before they are
// written); this is this design's choice, as is the exact split into these
// three registers, which the architecture only names "registers".
module sscd_regs #(
  parameter int unsigned N     = sscd_pkg::N,
  parameter int unsigned K     = sscd_pkg::K,
  parameter int unsigned Q     = sscd_pkg::Q,
  parameter int unsigned LOG2N = $clog2(N)
) (
  input  logic             clk,
  input  logic             load,
  input  logic [Q-1:0]     llr_in [N],
  output logic [Q-1:0]     llr_q  [N],
  input  logic             step,
  input  logic [LOG2N-2:0] pos,
  input  logic [1:0]       u_pair,
  output logic [N-1:0]     u_q,
  output logic [N-1:0]     u_full,
  input  logic             out_we,
  input  logic [N-1:0]     x_in,
  output logic [N-1:0]     x_q,
  input  logic [K-1:0]     info_in,
  output logic [K-1:0]     info_q
);

  always_ff @(posedge clk) begin
    if (load) llr_q <= llr_in;
    if (step) u_q   <= u_full;
    if (out_we) begin
      x_q    <= x_in;
      info_q <= info_in;
    end
  end

  always_comb begin
    u_full = u_q;
    u_full[{pos, 1'b0} +: 2] = u_pair;
  end

endmodule
