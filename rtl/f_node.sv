// Stochastic f node.
//
// The SC f function f(a,b) = (1+ab)/(a+b) on likelihood ratios becomes, on
// probabilities of a one, Pc = Pa(1-Pb) + Pb(1-Pa). With independent input
// streams this is exactly the probability that the two bits differ, so the
// node is a single XOR gate, as in the paper. Combinational, no latency.
module f_node (
  input  logic pa,
  input  logic pb,
  output logic pc
);
  assign pc = pa ^ pb;
endmodule
