// Stochastic successive-cancellation polar decoder, top level.
//
// Decodes one length-N polar codeword (natural order, x = u G_N) from N
// quantised BPSK samples using stochastic computing: every channel value
// becomes a bit-stream whose density of ones is Pr(bit = 1) (bitstream_gen,
// with channel-message scaling ALPHA), the SC decoding graph is built from
// XOR f nodes and JK-flip-flop g nodes working on those streams
// (sc_network, with re-randomizers between stages when RERAND = 1), and an
// h node counts the output stream of each u index over L clocks to decide it
// (h_node, sc_controller). psum_net feeds back the partial sums of the
// decided bits. The structure, the node circuits, ALPHA = 0.5, L = 1024 and
// the use of re-randomization follow the paper; the sample format, Q, the
// random sources, the re-randomizer circuit and the handshake are this
// design's own.
//
// Interface: with busy low, a one-clock start latches y (N samples, W-bit
// two's complement, FRAC fractional bits, +1.0 means bit 0) and the frozen
// mask (1 = frozen, decided as 0). done pulses N*L+1 clocks after the clock
// that sampled start; u_hat is then valid and held until the next start.
// The information bits are the u_hat bits at the unfrozen positions.
//
// A code of length n < N can be decoded by giving y = 0 (Pr = 0.5, no
// information) to positions 0..N-n-1 and freezing u indices 0..N-n-1; its
// samples and frozen mask go to the last n positions.
module stoch_sc_decoder #(
  parameter int  N      = 1024,
  parameter int  L      = 1024,
  parameter int  Q      = 10,
  parameter int  W      = 6,
  parameter int  FRAC   = 2,
  parameter real ALPHA  = 0.5,
  parameter bit  RERAND = 1'b1,
  parameter int  D      = 4,
  localparam int M      = $clog2(N)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  input  logic [N-1:0][W-1:0]        y,
  input  logic [N-1:0]               frozen,
  output logic                       busy,
  output logic                       done,
  output logic [N-1:0]               u_hat
);
  import scd_pkg::*;

  logic [N-1:0][W-1:0]   y_q;
  logic [N-1:0]          ch;
  logic [N-1:0]          out;
  logic [M-1:0][N/2-1:0] ps;
  logic                  clr, h_en, h_clr, h_decision;
  logic [M-1:0]          idx;

  // Channel sample register, loaded when a decode starts.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                y_q <= '0;
    else if (start && !busy)   y_q <= y;
  end

  for (genvar i = 0; i < N; i++) begin : g_in
    bitstream_gen #(.Q(Q), .W(W), .FRAC(FRAC), .ALPHA(ALPHA),
                    .SEED(seed_of(0, i))) u_gen (
      .clk(clk), .rst_n(rst_n), .y(signed'(y_q[i])), .bit_o(ch[i]));
  end

  sc_network #(.N(N), .RERAND(RERAND), .D(D)) u_net (
    .clk(clk), .rst_n(rst_n), .clr(clr), .ch(ch), .ps(ps), .out(out));

  psum_net #(.N(N)) u_psum (.u_hat(u_hat), .ps(ps));

  h_node #(.L(L)) u_h (
    .clk(clk), .rst_n(rst_n), .clr(h_clr), .en(h_en), .bit_i(out[idx]),
    .count(), .decision(h_decision));

  sc_controller #(.N(N), .L(L)) u_ctrl (
    .clk(clk), .rst_n(rst_n), .start(start), .frozen(frozen),
    .h_decision(h_decision), .busy(busy), .done(done), .clr(clr),
    .h_en(h_en), .h_clr(h_clr), .idx(idx), .u_hat(u_hat));
endmodule
