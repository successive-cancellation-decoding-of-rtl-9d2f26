// Pseudo-random number generator for the stochastic decoder.
//
// A 32-bit xorshift generator (Marsaglia, shifts 13/17/5) that advances one
// step every clock and presents its whole state as the random word. The paper
// only names a "pseudo-random number generator" in the input bit-stream
// generator; the choice of xorshift (period 2^32-1, cheap: three shifts and
// XORs) is this design's own. Reset loads SEED, which must be non-zero.
//
// Timing: rnd changes on every rising clock edge after reset is released.
module xorshift32 #(
  parameter logic [31:0] SEED = 32'h2545F491
) (
  input  logic        clk,
  input  logic        rst_n,
  output logic [31:0] rnd
);
  import scd_pkg::*;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) rnd <= SEED;
    else        rnd <= xs32_next(rnd);
  end

  if (SEED == 32'd0) begin : g_bad_seed
    $error("xorshift32: SEED must be non-zero");
  end
endmodule
