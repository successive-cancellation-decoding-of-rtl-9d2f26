// Bit-stream re-randomizer.
//
// A stochastic stream that has passed through several logic levels loses its
// randomness: neighbouring bits and parallel streams become correlated, and
// the f and g nodes, which assume independent inputs, then compute the wrong
// probability. The paper states that the streams must be re-randomized but
// gives no circuit; this one is this design's own. It is a D-bit shuffle
// buffer: every clock the incoming bit is written into the slot addressed by
// the random input sel, and the bit that slot held is emitted. Every bit that
// enters leaves exactly once, so the density of ones is kept exactly while
// the order of the bits is scrambled.
//
// Timing: bit_o is the old content of slot sel before the clock edge
// (combinational read, registered write). Reset fills the slots with an
// alternating 0/1 pattern (density 0.5).
module rerandomizer #(
  parameter int D = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [$clog2(D)-1:0] sel,
  input  logic                 bit_i,
  output logic                 bit_o
);
  logic [D-1:0] slots;

  assign bit_o = slots[sel];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < D; i++) slots[i] <= i[0];
    end else begin
      slots[sel] <= bit_i;
    end
  end

  if (D < 2 || (D & (D - 1)) != 0) begin : g_bad_d
    $error("rerandomizer: D must be a power of two >= 2");
  end
endmodule
