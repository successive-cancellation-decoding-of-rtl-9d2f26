// Testbench for f_node: exhaustive truth table, then two random streams of
// known density whose output density must match Pa(1-Pb)+Pb(1-Pa).
module tb_f_node;
  logic pa, pb, pc;
  int checks = 0, failures = 0;

  f_node dut (.pa(pa), .pb(pb), .pc(pc));

  initial begin : watchdog
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real dens[4][2] = '{'{0.1, 0.2}, '{0.5, 0.5}, '{0.9, 0.3}, '{0.7, 0.75}};
    for (int v = 0; v < 4; v++) begin
      pa = v[1]; pb = v[0]; #1;
      checks++;
      if (pc !== ((v == 1) || (v == 2))) begin failures++; $display("tt %0d -> %b", v, pc); end
    end
    foreach (dens[t]) begin
      int ones;
      real pe, got;
      ones = 0;
      for (int i = 0; i < 20000; i++) begin
        pa = ($urandom % 10000) < int'(dens[t][0] * 10000);
        pb = ($urandom % 10000) < int'(dens[t][1] * 10000);
        #1;
        ones += pc;
      end
      pe  = dens[t][0] * (1 - dens[t][1]) + dens[t][1] * (1 - dens[t][0]);
      got = real'(ones) / 20000.0;
      checks++;
      if (got < pe - 0.02 || got > pe + 0.02) begin
        failures++; $display("density %f expected %f", got, pe);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
