// Testbench for bitstream_gen: for every sample code checks the table entry
// against round(2^Q / (1 + exp(4*alpha*y))) computed here, and the density of
// ones of the generated stream against the same probability.
module tb_bitstream_gen;
  import tb_polar_pkg::*;
  localparam int  Q = 10, W = 6, FRAC = 2;
  localparam real ALPHA = 0.5;
  logic clk = 0, rst_n = 0, bit_o;
  logic signed [W-1:0] y = '0;
  int checks = 0, failures = 0;

  bitstream_gen #(.Q(Q), .W(W), .FRAC(FRAC), .ALPHA(ALPHA), .SEED(32'hCAFE_F00D)) dut (
    .clk(clk), .rst_n(rst_n), .y(y), .bit_o(bit_o));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    localparam int LEN = 4096;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int code = -(1 << (W - 1)); code < (1 << (W - 1)); code++) begin
      real yr, p, e;
      int ones;
      yr = real'(code) / real'(1 << FRAC);
      p  = 1.0 / (1.0 + $exp(4.0 * ALPHA * yr));
      e  = $floor(p * 1024.0 + 0.5);
      if (e > 1023.0) e = 1023.0;
      @(negedge clk);
      y = W'(code);
      #1;
      checks++;
      if (int'(dut.prob) != int'(e)) begin
        failures++; $display("code %0d table %0d expected %0d", code, dut.prob, int'(e));
      end
      ones = 0;
      for (int i = 0; i < LEN; i++) begin
        @(negedge clk);
        ones += bit_o;
      end
      checks++;
      if (rabs(real'(ones) / LEN - e / 1024.0) > 0.03) begin
        failures++; $display("code %0d density %f expected %f", code, real'(ones) / LEN, e / 1024.0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
