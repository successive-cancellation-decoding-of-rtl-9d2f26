// End-to-end testbench for stoch_sc_decoder, reduced size (N = 64,
// L = 1024, the paper's stream length). Rate-1/2 code, frozen set from the
// Bhattacharyya bound. Phase 1: clean, saturated samples must decode to the
// sent word exactly. Phase 2: frames at Eb/N0 = 3 dB are decoded both by the
// design and by a floating-point SC decoder on the same scaled messages; the
// design's information-bit error rate must stay below a loose bound. Phase 3:
// a length-16 code decoded through the erasure-padding mode. Every frame's
// start-to-done latency must be N*L+1. Counts how often each mechanism was
// exercised: g nodes on the decoded path with u_sum = 0 and 1, JK hold,
// re-randomizer reordering, frozen bits whose h decision was overruled, and
// decided ones and zeros.
module tb_stoch_sc_decoder;
  import tb_polar_pkg::*;
  localparam int  N = 64, L = 1024, W = 6, FRAC = 2, M = $clog2(N);
  localparam real ALPHA = 0.5;
  localparam int  CLEAN_FRAMES = 4, NOISY_FRAMES = 16;
  localparam real EBN0_DB = 3.0;

  logic clk = 0, rst_n = 0, start = 0;
  logic [N-1:0][W-1:0] y = '0;
  logic [N-1:0] frozen = '0;
  logic busy, done;
  logic [N-1:0] u_hat;
  int checks = 0, failures = 0;

  stoch_sc_decoder #(.N(N), .L(L), .W(W), .FRAC(FRAC), .ALPHA(ALPHA)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .y(y), .frozen(frozen),
    .busy(busy), .done(done), .u_hat(u_hat));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat ((CLEAN_FRAMES + NOISY_FRAMES + 2) * (N * L + 10) + 1000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  longint n_g_u0, n_g_u1, n_hold, n_rr_moved, n_frozen_overrule, n_dec1, n_dec0;
  initial begin
    n_g_u0 = 0; n_g_u1 = 0; n_hold = 0; n_rr_moved = 0;
    n_frozen_overrule = 0; n_dec1 = 0; n_dec0 = 0;
  end
  always @(posedge clk) if (dut.busy) begin
    // g node of the last stage on row N-1 (decides u_{N-1} after u_{N-2})
    if (dut.u_net.g_stage[M-1].g_pair[N/2-1].u_g.usum) n_g_u1++; else n_g_u0++;
    if (!dut.u_net.g_stage[M-1].g_pair[N/2-1].u_g.j && !dut.u_net.g_stage[M-1].g_pair[N/2-1].u_g.k) n_hold++;
    if (dut.u_net.g_stage[0].g_rr.g_row[0].u_rr.bit_o != dut.u_net.g_stage[0].g_rr.g_row[0].u_rr.bit_i)
      n_rr_moved++;
    if (dut.u_ctrl.h_clr && dut.u_ctrl.idx != 0) begin
      if (dut.u_ctrl.frz[dut.u_ctrl.idx - 1] && dut.h_decision) n_frozen_overrule++;
      if (dut.h_decision) n_dec1++; else n_dec0++;
    end
  end

  task automatic run_frame(intvec_t q, bitvec_t fr, output logic [N-1:0] res);
    int lat;
    @(negedge clk);
    for (int i = 0; i < N; i++) begin y[i] = W'(q[i]); frozen[i] = fr[i]; end
    start = 1;
    @(posedge clk); #1;
    start = 0;
    y = '0;  // inputs are latched; changing them must not matter
    lat = 0;
    while (!done) begin @(posedge clk); #1; lat++; end
    checks++;
    if (lat != N * L + 1) begin failures++; $display("latency %0d, expected %0d", lat, N * L + 1); end
    res = u_hat;
  endtask

  initial begin
    bitvec_t fr, u, x, uref, fr16;
    intvec_t q;
    logic [N-1:0] res;
    int err_hw, err_ref, info_bits;
    real sigma2;

    fr = frozen_set(N, N / 2);
    u = new[N];
    repeat (3) @(posedge clk);
    rst_n = 1;

    // phase 1: clean, saturated samples
    for (int t = 0; t < CLEAN_FRAMES; t++) begin
      int errs;
      for (int i = 0; i < N; i++) u[i] = fr[i] ? 1'b0 : 1'(($urandom));
      x = encode(u);
      q = channel(x, 0.0, 8.0, W, FRAC);
      run_frame(q, fr, res);
      errs = 0;
      for (int i = 0; i < N; i++) errs += (res[i] != u[i]);
      checks++;
      if (errs != 0) begin failures++; $display("clean frame %0d: %0d bit errors", t, errs); end
    end

    // phase 2: noisy frames, rate 1/2
    sigma2 = 1.0 / (2.0 * 0.5 * (10.0 ** (EBN0_DB / 10.0)));
    err_hw = 0; err_ref = 0; info_bits = 0;
    for (int t = 0; t < NOISY_FRAMES; t++) begin
      for (int i = 0; i < N; i++) u[i] = fr[i] ? 1'b0 : 1'(($urandom));
      x = encode(u);
      q = channel(x, sigma2, 1.0, W, FRAC);
      uref = sc_decode(q, fr, FRAC, ALPHA);
      run_frame(q, fr, res);
      for (int i = 0; i < N; i++) if (!fr[i]) begin
        info_bits++;
        err_hw  += (res[i] != u[i]);
        err_ref += (uref[i] != u[i]);
        checks++;
        if (res[i] != 0 && fr[i]) failures++;
      end
      for (int i = 0; i < N; i++) if (fr[i]) begin
        checks++;
        if (res[i] != 1'b0) begin failures++; $display("frozen bit %0d decided 1", i); end
      end
    end
    $display("Eb/N0 %0.1f dB: stochastic BER %0.4f, floating-point SC BER %0.4f (%0d info bits)",
             EBN0_DB, real'(err_hw) / info_bits, real'(err_ref) / info_bits, info_bits);
    checks++;
    if (real'(err_hw) / info_bits > 0.10) begin failures++; $display("stochastic BER too high"); end

    // phase 3: length-16 rate-1/2 code through erasure padding
    begin
      int n, errs;
      bitvec_t us, xs;
      intvec_t qs;
      n = 16;
      fr16 = frozen_set(n, n / 2);
      us = new[n];
      for (int i = 0; i < n; i++) us[i] = fr16[i] ? 1'b0 : 1'(($urandom));
      xs = encode(us);
      qs = channel(xs, 0.0, 8.0, W, FRAC);
      q = new[N];
      for (int i = 0; i < N; i++) begin
        q[i] = (i < N - n) ? 0 : qs[i - (N - n)];
        fr[i] = (i < N - n) ? 1'b1 : fr16[i - (N - n)];
      end
      run_frame(q, fr, res);
      errs = 0;
      for (int i = 0; i < n; i++) errs += (res[N - n + i] != us[i]);
      checks++;
      if (errs != 0) begin failures++; $display("padded length-16 frame: %0d errors", errs); end
    end

    $display("mechanisms: g usum=0 %0d, g usum=1 %0d, JK hold %0d, re-randomizer reorder %0d, frozen overruled %0d, decided 1 %0d, decided 0 %0d",
             n_g_u0, n_g_u1, n_hold, n_rr_moved, n_frozen_overrule, n_dec1, n_dec0);
    checks += 7;
    if (n_g_u0 == 0) failures++;
    if (n_g_u1 == 0) failures++;
    if (n_hold == 0) failures++;
    if (n_rr_moved == 0) failures++;
    if (n_frozen_overrule == 0) failures++;
    if (n_dec1 == 0) failures++;
    if (n_dec0 == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
