// Workload testbench: rate-1/2 polar codes at Eb/N0 = 1, 2 and 3 dB through
// the decoder configurations the stochastic SC study compares:
//   A  n = 64,  1024-bit streams, alpha = 0.5, re-randomized (final setup)
//   B  n = 256, 1024-bit streams, alpha = 0.5, re-randomized (final setup)
//   C  n = 64,  128-bit streams,  alpha = 0.5, no re-randomization
//   D  n = 64,  128-bit streams,  no channel scaling, no re-randomization
// "No scaling" uses the unscaled ratio -4y/N0; with the table's form
// 1/(1+exp(4*ALPHA*y)) that is ALPHA = 1/N0, here fixed for 2 dB.
// Each design decodes the same kind of random frames as a floating-point
// SC decoder. Checks: every latency N*L+1, frozen bits 0, and for the final
// setup (A, B) a bit error rate no worse than the reference's plus 0.1 at
// every point. C and D are reported only; the frame counts are far too
// small to rank configurations.
module tb_workloads;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  localparam real N0_2DB = 2.0 * (1.0 / (2.0 * 0.5 * (10.0 ** 0.2)));

  logic fin[4];
  int bl[4], bf[4], ib[4];
  int eh[4][3], er[4][3];

  ber_runner #(.N(64),  .L(1024), .ALPHA(0.5), .RERAND(1'b1), .FRAMES(8), .NAME("A n=64 L=1024 rerand"))
    u_a (.clk(clk), .rst_n(rst_n), .finished(fin[0]), .bad_latency(bl[0]), .bad_frozen(bf[0]),
         .err_hw(eh[0]), .err_ref(er[0]), .info_bits(ib[0]));
  ber_runner #(.N(256), .L(1024), .ALPHA(0.5), .RERAND(1'b1), .FRAMES(3), .NAME("B n=256 L=1024 rerand"))
    u_b (.clk(clk), .rst_n(rst_n), .finished(fin[1]), .bad_latency(bl[1]), .bad_frozen(bf[1]),
         .err_hw(eh[1]), .err_ref(er[1]), .info_bits(ib[1]));
  ber_runner #(.N(64),  .L(128),  .ALPHA(0.5), .RERAND(1'b0), .FRAMES(24), .NAME("C n=64 L=128 scaled"))
    u_c (.clk(clk), .rst_n(rst_n), .finished(fin[2]), .bad_latency(bl[2]), .bad_frozen(bf[2]),
         .err_hw(eh[2]), .err_ref(er[2]), .info_bits(ib[2]));
  ber_runner #(.N(64),  .L(128),  .ALPHA(1.0 / N0_2DB), .RERAND(1'b0), .FRAMES(24), .NAME("D n=64 L=128 unscaled"))
    u_d (.clk(clk), .rst_n(rst_n), .finished(fin[3]), .bad_latency(bl[3]), .bad_frozen(bf[3]),
         .err_hw(eh[3]), .err_ref(er[3]), .info_bits(ib[3]));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (3 * 3 * (256 * 1024 + 10) + 10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (fin[0] && fin[1] && fin[2] && fin[3]);
    for (int k = 0; k < 4; k++) begin
      checks += 2;
      if (bl[k] != 0) begin failures++; $display("runner %0d: %0d wrong latencies", k, bl[k]); end
      if (bf[k] != 0) begin failures++; $display("runner %0d: %0d frozen bits decided 1", k, bf[k]); end
    end
    for (int k = 0; k < 2; k++)
      for (int p = 0; p < 3; p++) begin
        checks++;
        if (real'(eh[k][p]) / ib[k] > real'(er[k][p]) / ib[k] + 0.1) begin
          failures++; $display("runner %0d at %0d dB: BER far above the reference", k, p + 1);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
