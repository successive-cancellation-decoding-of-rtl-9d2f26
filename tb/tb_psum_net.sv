// Testbench for psum_net: for random u_hat, every g node's partial sum is
// recomputed directly from the generator matrix: for G = F^(x k) with
// F = [1 0; 1 1], coordinate c of v*G is the XOR of v_r over all r whose
// binary digits include those of c.
module tb_psum_net;
  localparam int N = 32;
  localparam int M = $clog2(N);
  logic [N-1:0] u_hat;
  logic [M-1:0][N/2-1:0] ps;
  int checks = 0, failures = 0;

  psum_net #(.N(N)) dut (.u_hat(u_hat), .ps(ps));

  initial begin : watchdog
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      u_hat = {$urandom, $urandom};
      #1;
      for (int s = 0; s < M; s++) begin
        int h;
        h = N >> (s + 1);
        for (int gi = 0; gi < N / 2; gi++) begin
          int base, c;
          logic e;
          base = (gi / h) * 2 * h;
          c = gi % h;
          e = 0;
          for (int r = 0; r < h; r++) if ((r & c) == c) e ^= u_hat[base + r];
          checks++;
          if (ps[s][gi] !== e) begin
            failures++;
            if (failures < 5) $display("s=%0d gi=%0d got %b exp %b", s, gi, ps[s][gi], e);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
