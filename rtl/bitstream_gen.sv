// Input bit-stream generator (lookup table, pseudo-random source, comparator).
//
// Converts one quantised received sample into a stochastic bit-stream whose
// density of ones is Pr(y_i = 1). As in the paper, a q-bit lookup table gives
// the probability and a comparator against a q-bit pseudo-random number emits
// one stream bit per clock. Channel-message scaling with factor ALPHA is
// folded into the table (see scd_pkg::lut_value): for a BPSK sample y the
// entry is round(2^Q / (1 + exp(4*ALPHA*y))). The table is computed when the
// design is elaborated, so changing ALPHA, Q, W or FRAC needs no data file.
//
// Own choices: the sample format (W-bit two's complement, FRAC fractional
// bits), Q = 10 (precision 2^-10 to match the 1024-bit stream), the random
// source (a private xorshift32 whose top Q bits are used) and the comparator
// sense bit_o = (random < table value).
//
// Timing: the table and comparator are combinational; bit_o changes every
// clock because the random number does. A change of y shows on the next bit.
module bitstream_gen #(
  parameter int          Q     = 10,
  parameter int          W     = 6,
  parameter int          FRAC  = 2,
  parameter real         ALPHA = 0.5,
  parameter logic [31:0] SEED  = 32'h2545F491
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic signed [W-1:0] y,
  output logic                bit_o
);
  import scd_pkg::*;

  localparam int ENTRIES = 1 << W;
  typedef logic [Q-1:0] lut_t [ENTRIES];

  // Entry at address a is for the two's complement code a.
  function automatic lut_t build_lut();
    lut_t t;
    for (int a = 0; a < ENTRIES; a++) begin
      t[a] = Q'(lut_value((a < ENTRIES / 2) ? a : a - ENTRIES, FRAC, Q, ALPHA));
    end
    return t;
  endfunction

  localparam lut_t LUT = build_lut();

  logic [31:0]  rnd;
  logic [Q-1:0] prob;

  xorshift32 #(.SEED(SEED)) u_prng (.clk(clk), .rst_n(rst_n), .rnd(rnd));

  assign prob  = LUT[y];
  assign bit_o = (rnd[31 -: Q] < prob);

  if (Q > 32 || Q < 1) begin : g_bad_q
    $error("bitstream_gen: Q must be 1..32");
  end
endmodule
