// Hard-decision (h) node for one stochastic output stream.
//
// Counts the ones of the stream from the last decoder stage over a window of
// L clocks and decides u_hat = 1 when more than half of the window was one,
// i.e. when the stream says Pr(u = 1) > 0.5. The paper only names the h node;
// the majority count is this design's own, the simplest decision on a
// bit-stream.
//
// Interface and timing: every clock with en = 1 adds bit_i to count. clr
// starts a new window with the bit presented in the same clock, so that the
// window's first bit is counted while the previous window's result is still
// on decision: windows follow each other with no idle clock. decision is
// combinational from count and valid once L bits have been counted. The
// counter saturates at L.
module h_node #(
  parameter int L = 1024
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   clr,
  input  logic                   en,
  input  logic                   bit_i,
  output logic [$clog2(L+1)-1:0] count,
  output logic                   decision
);
  localparam int CW = $clog2(L + 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                              count <= '0;
    else if (clr)                            count <= CW'(en & bit_i);
    else if (en && bit_i && count != CW'(L)) count <= count + 1'b1;
  end

  assign decision = (count > CW'(L / 2));
endmodule
