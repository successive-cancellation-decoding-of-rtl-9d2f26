// Helper for the workload testbench: one decoder instance with its own
// parameters, decoding FRAMES random rate-1/2 frames at each Eb/N0 in
// {1, 2, 3} dB. Per point it reports information-bit errors of the design
// and of the floating-point SC reference (on the same scaled samples), and
// counts latency and frozen-bit violations. finished rises when all points
// are done.
module ber_runner #(
  parameter int    N      = 64,
  parameter int    L      = 1024,
  parameter real   ALPHA  = 0.5,
  parameter bit    RERAND = 1'b1,
  parameter int    FRAMES = 4,
  parameter string NAME   = "decoder"
) (
  input  logic   clk,
  input  logic   rst_n,
  output logic   finished,
  output int     bad_latency,
  output int     bad_frozen,
  output int     err_hw[3],
  output int     err_ref[3],
  output int     info_bits
);
  import tb_polar_pkg::*;
  localparam int W = 6, FRAC = 2;

  logic start = 0, busy, done;
  logic [N-1:0][W-1:0] y = '0;
  logic [N-1:0] frozen = '0, u_hat;

  stoch_sc_decoder #(.N(N), .L(L), .ALPHA(ALPHA), .RERAND(RERAND)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .y(y), .frozen(frozen),
    .busy(busy), .done(done), .u_hat(u_hat));

  initial begin
    bitvec_t fr, u, x, uref;
    intvec_t q;
    finished = 0; bad_latency = 0; bad_frozen = 0; info_bits = 0;
    for (int p = 0; p < 3; p++) begin err_hw[p] = 0; err_ref[p] = 0; end
    fr = frozen_set(N, N / 2);
    u = new[N];
    @(posedge rst_n);
    for (int p = 0; p < 3; p++) begin
      real sigma2;
      sigma2 = 1.0 / (2.0 * 0.5 * (10.0 ** ((1.0 + p) / 10.0)));
      for (int t = 0; t < FRAMES; t++) begin
        int lat;
        for (int i = 0; i < N; i++) u[i] = fr[i] ? 1'b0 : 1'(($urandom));
        x = encode(u);
        q = channel(x, sigma2, 1.0, W, FRAC);
        uref = sc_decode(q, fr, FRAC, 0.5);
        @(negedge clk);
        for (int i = 0; i < N; i++) begin y[i] = W'(q[i]); frozen[i] = fr[i]; end
        start = 1;
        @(posedge clk); #1;
        start = 0; lat = 0;
        while (!done) begin @(posedge clk); #1; lat++; end
        if (lat != N * L + 1) bad_latency++;
        for (int i = 0; i < N; i++) begin
          if (fr[i]) bad_frozen += (u_hat[i] != 1'b0);
          else begin
            err_hw[p]  += (u_hat[i] != u[i]);
            err_ref[p] += (uref[i] != u[i]);
            if (p == 0) info_bits++;
          end
        end
      end
      $display("%s: Eb/N0 %0d dB: design BER %0.4f, floating-point SC BER %0.4f",
               NAME, p + 1, real'(err_hw[p]) / (FRAMES * N / 2), real'(err_ref[p]) / (FRAMES * N / 2));
    end
    finished = 1;
  end
endmodule
