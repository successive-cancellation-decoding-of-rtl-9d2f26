// Shared definitions for the stochastic successive-cancellation (SC) polar decoder.
//
// Holds the xorshift step used by every pseudo-random source, the
// elaboration-time function that fills the channel-message lookup table, and
// the seed-spreading function that gives each random source its own start
// state. Nothing here is clocked.
//
// The table function applies channel-message scaling: a received BPSK sample
// y (bit 0 sent as +1, unit symbol energy, AWGN) has log-likelihood ratio
// ln(P1/P0) = -4y/N0; scaling it by alpha*N0 gives -4*alpha*y, so the stored
// probability Pr(bit=1) = 1/(1+exp(4*alpha*y)) no longer depends on the noise
// level. The scaling rule and alpha = 0.5 follow the paper; the BPSK/AWGN
// model, the sample format and the rounding are this design's own choices.
package scd_pkg;

  // One step of Marsaglia's 32-bit xorshift generator (shifts 13, 17, 5).
  function automatic logic [31:0] xs32_next(input logic [31:0] s);
    logic [31:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 17);
    t = t ^ (t << 5);
    return t;
  endfunction

  // Non-zero, well-spread seed for random source number k of a family.
  function automatic logic [31:0] seed_of(input int unsigned family, input int unsigned k);
    logic [31:0] s;
    s = 32'h9E3779B9 * (k + 1) + 32'h7F4A7C15 * (family + 1);
    s = s ^ (s >> 16);
    s = s * 32'h85EBCA6B;
    s = s ^ (s >> 13);
    if (s == 32'd0) s = 32'h1;
    return s;
  endfunction

  // Table entry: Pr(bit=1) of the scaled channel message for a W-bit two's
  // complement sample code with FRAC fractional bits, in units of 2^-Q,
  // rounded and saturated to 2^Q-1.
  function automatic int unsigned lut_value(input int code, input int frac,
                                            input int q, input real alpha);
    real y, p, v, top;
    y   = real'(code) / real'(1 << frac);
    p   = 1.0 / (1.0 + $exp(4.0 * alpha * y));
    top = real'((1 << q) - 1);
    v   = p * real'(1 << q) + 0.5;
    if (v > top) v = top;
    return int'($floor(v));
  endfunction

endpackage
