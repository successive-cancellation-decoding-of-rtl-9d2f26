// Full-size testbench for stoch_sc_decoder with every parameter at its
// default (N = 1024, L = 1024). Decodes one clean, saturated rate-1/2 frame,
// which must come back exactly, and one frame at Eb/N0 = 3 dB, whose
// information-bit errors are reported next to a floating-point SC decoder's
// and must stay below 10 %. Checks the N*L+1 latency of both frames.
module tb_stoch_sc_decoder_full;
  import tb_polar_pkg::*;
  localparam int  N = 1024, L = 1024, W = 6, FRAC = 2;
  localparam real ALPHA = 0.5;

  logic clk = 0, rst_n = 0, start = 0;
  logic [N-1:0][W-1:0] y = '0;
  logic [N-1:0] frozen = '0;
  logic busy, done;
  logic [N-1:0] u_hat;
  int checks = 0, failures = 0;

  stoch_sc_decoder dut (
    .clk(clk), .rst_n(rst_n), .start(start), .y(y), .frozen(frozen),
    .busy(busy), .done(done), .u_hat(u_hat));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (2 * (N * L + 10) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run_frame(intvec_t q, bitvec_t fr, output logic [N-1:0] res);
    int lat;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin y[i] = W'(q[i]); frozen[i] = fr[i]; end
    start = 1;
    @(posedge clk); #1;
    start = 0;
    lat = 0;
    while (!done) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != N * L + 1) begin failures++; $display("latency %0d, expected %0d", lat, N * L + 1); end
    res = u_hat;
  endtask

  initial begin
    bitvec_t fr, u, x, uref;
    intvec_t q;
    logic [N-1:0] res;
    int errs, err_ref, info_bits;
    real sigma2;

    fr = frozen_set(N, N / 2);
    u = new[N];
    repeat (3) @(posedge clk);
    rst_n = 1;

    for (int i = 0; i < N; i++) u[i] = fr[i] ? 1'b0 : 1'(($urandom));
    x = encode(u);
    q = channel(x, 0.0, 8.0, W, FRAC);
    run_frame(q, fr, res);
    errs = 0;
    for (int i = 0; i < N; i++) errs += (res[i] != u[i]);
    checks++;
    if (errs != 0) begin failures++; $display("clean frame: %0d bit errors", errs); end

    sigma2 = 1.0 / (2.0 * 0.5 * (10.0 ** 0.3));
    for (int i = 0; i < N; i++) u[i] = fr[i] ? 1'b0 : 1'(($urandom));
    x = encode(u);
    q = channel(x, sigma2, 1.0, W, FRAC);
    uref = sc_decode(q, fr, FRAC, ALPHA);
    run_frame(q, fr, res);
    errs = 0; err_ref = 0; info_bits = 0;
    for (int i = 0; i < N; i++) begin
      if (!fr[i]) begin
        info_bits++;
        errs += (res[i] != u[i]);
        err_ref += (uref[i] != u[i]);
      end else begin
        checks++;
        if (res[i] != 1'b0) failures++;
      end
    end
    $display("3 dB frame: %0d of %0d information bits wrong (floating-point SC: %0d)", errs, info_bits, err_ref);
    checks++;
    if (real'(errs) / info_bits > 0.10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
