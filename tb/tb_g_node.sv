// Testbench for g_node: compares every output bit with a JK flip-flop model
// for random inputs, checks clear, and checks the output density against
// eq. (7) (u_sum = 0) and eq. (9) (u_sum = 1) for several input densities.
module tb_g_node;
  logic clk = 0, rst_n = 0, clr = 0, pa = 0, pb = 0, usum = 0, pc;
  int checks = 0, failures = 0;

  g_node dut (.clk(clk), .rst_n(rst_n), .clr(clr), .pa(pa), .pb(pb), .usum(usum), .pc(pc));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic q;
    real dens[3][2] = '{'{0.7, 0.6}, '{0.2, 0.9}, '{0.45, 0.3}};
    repeat (2) @(posedge clk);
    rst_n = 1;
    q = 0;
    // bit-exact comparison with a JK model
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      checks++;
      if (pc !== q) begin failures++; if (failures < 5) $display("cycle %0d got %b exp %b", i, pc, q); end
      pa = $urandom; pb = $urandom; usum = $urandom; clr = ($urandom % 50) == 0;
      if (clr) q = 0;
      else if ((pa ^ usum) & pb) q = 1;
      else if (!(pa ^ usum) & !pb) q = 0;
    end
    // density checks
    foreach (dens[t]) begin
      for (int u = 0; u < 2; u++) begin
        int ones;
        real a, b, pe, got;
        a = dens[t][0]; b = dens[t][1]; ones = 0;
        usum = u[0]; clr = 0;
        for (int i = 0; i < 30000; i++) begin
          @(negedge clk);
          ones += pc;
          pa = ($urandom % 10000) < int'(a * 10000);
          pb = ($urandom % 10000) < int'(b * 10000);
        end
        if (u == 0) pe = a * b / (a * b + (1 - a) * (1 - b));
        else        pe = (1 - a) * b / ((1 - a) * b + a * (1 - b));
        got = real'(ones) / 30000.0;
        checks++;
        if (got < pe - 0.025 || got > pe + 0.025) begin
          failures++; $display("usum=%0d Pa=%f Pb=%f density %f expected %f", u, a, b, got, pe);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
