// Stochastic g node.
//
// The SC g function g(a,b,u) = a^(1-2u) * b on likelihood ratios becomes
//   u = 0: Pc = PaPb / (PaPb + (1-Pa)(1-Pb))
//   u = 1: Pc = (1-Pa)Pb / ((1-Pa)Pb + Pa(1-Pb))
// The circuit follows the paper: a 2:1 multiplexer controlled by the partial
// sum u_sum passes Pa (u_sum=0) or NOT Pa (u_sum=1) as a'; J = a' AND b sets a
// JK flip-flop, K = (NOT a') AND (NOT b) resets it, and when the two bits
// disagree the flip-flop holds. The stationary probability of Q = 1 is
// P(J)/(P(J)+P(K)), the expressions above.
//
// Timing: pc is the flip-flop output, one clock behind its inputs. clr (this
// design's own) clears Q synchronously at the start of each codeword; reset
// clears it too.
module g_node (
  input  logic clk,
  input  logic rst_n,
  input  logic clr,
  input  logic pa,
  input  logic pb,
  input  logic usum,
  output logic pc
);
  logic a_sel, j, k;

  assign a_sel = usum ? ~pa : pa;
  assign j     = a_sel & pb;
  assign k     = ~a_sel & ~pb;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   pc <= 1'b0;
    else if (clr) pc <= 1'b0;
    else begin
      unique case ({j, k})
        2'b10:   pc <= 1'b1;
        2'b01:   pc <= 1'b0;
        2'b11:   pc <= ~pc;   // cannot occur: J and K need opposite a'/b
        default: pc <= pc;    // hold
      endcase
    end
  end
endmodule
