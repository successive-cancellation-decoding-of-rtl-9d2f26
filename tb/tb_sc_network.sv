// Testbench for sc_network (N = 16, with re-randomizers). Part 1: constant
// channel streams equal to a codeword x = uG and the true partial sums; after
// the re-randomizers have flushed, every output row i must carry u_i
// constantly. Part 2: N = 2 without re-randomizers; random channel streams
// must give the f density on row 0 and the g density on row 1.
module tb_sc_network;
  import tb_polar_pkg::*;
  localparam int N = 16, M = $clog2(N);
  logic clk = 0, rst_n = 0, clr = 0;
  logic [N-1:0] ch = '0, out;
  logic [M-1:0][N/2-1:0] ps = '0;
  logic [1:0] ch2 = '0, out2;
  logic [0:0][0:0] ps2 = '0;
  int checks = 0, failures = 0;

  sc_network #(.N(N), .RERAND(1'b1), .D(4)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .ch(ch), .ps(ps), .out(out));
  sc_network #(.N(2), .RERAND(1'b0)) dut2 (
    .clk(clk), .rst_n(rst_n), .clr(clr), .ch(ch2), .ps(ps2), .out(out2));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bitvec_t u, x;
    u = new[N];
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      logic [N-1:0] uv;
      for (int i = 0; i < N; i++) u[i] = $urandom;
      x = encode(u);
      @(negedge clk);
      clr = (t % 2 == 0);
      for (int i = 0; i < N; i++) begin ch[i] = x[i]; uv[i] = u[i]; end
      for (int s = 0; s < M; s++) begin
        int h;
        h = N >> (s + 1);
        for (int gi = 0; gi < N / 2; gi++) begin
          int base, c;
          logic e;
          base = (gi / h) * 2 * h; c = gi % h; e = 0;
          for (int r = 0; r < h; r++) if ((r & c) == c) e ^= u[base + r];
          ps[s][gi] = e;
        end
      end
      @(negedge clk); clr = 0;
      repeat (300) @(negedge clk);
      for (int k = 0; k < 20; k++) begin
        @(negedge clk);
        checks++;
        if (out !== uv) begin
          failures++;
          if (failures < 5) $display("trial %0d out %b expected %b", t, out, uv);
        end
      end
    end
    // stochastic densities, N = 2
    for (int u0 = 0; u0 < 2; u0++) begin
      int o0, o1;
      real a, b, pf, pg;
      a = 0.3; b = 0.8; o0 = 0; o1 = 0;
      ps2[0][0] = u0[0];
      for (int i = 0; i < 40000; i++) begin
        @(negedge clk);
        o0 += out2[0]; o1 += out2[1];
        ch2[0] = ($urandom % 1000) < int'(a * 1000);
        ch2[1] = ($urandom % 1000) < int'(b * 1000);
      end
      pf = a * (1 - b) + b * (1 - a);
      pg = u0 ? (1 - a) * b / ((1 - a) * b + a * (1 - b)) : a * b / (a * b + (1 - a) * (1 - b));
      checks += 2;
      if (rabs(real'(o0) / 40000.0 - pf) > 0.02) begin failures++; $display("f density %f exp %f", real'(o0) / 40000.0, pf); end
      if (rabs(real'(o1) / 40000.0 - pg) > 0.02) begin failures++; $display("g density %f exp %f", real'(o1) / 40000.0, pg); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
