// Testbench for h_node: feeds windows with a known number of ones (below, at
// and above L/2) and checks the count, the decision, back-to-back windows
// (clr counts its own bit) and saturation.
module tb_h_node;
  localparam int L = 64;
  logic clk = 0, rst_n = 0, clr = 0, en = 0, bit_i = 0;
  logic [$clog2(L+1)-1:0] count;
  logic decision;
  int checks = 0, failures = 0;

  h_node #(.L(L)) dut (.clk(clk), .rst_n(rst_n), .clr(clr), .en(en), .bit_i(bit_i),
                       .count(count), .decision(decision));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int targets[7] = '{0, 10, 31, 32, 33, 50, 64};
    repeat (2) @(posedge clk);
    rst_n = 1;
    foreach (targets[t]) begin
      int k;
      int order[L];
      k = targets[t];
      for (int i = 0; i < L; i++) order[i] = (i < k);
      order.shuffle();
      for (int i = 0; i < L; i++) begin
        @(negedge clk);
        en = 1; clr = (i == 0); bit_i = order[i][0];
      end
      @(negedge clk);
      // the next window starts now with a zero bit; the old result is visible
      checks++;
      if (count != k || decision != (k > L / 2)) begin
        failures++; $display("k=%0d count=%0d decision=%b", k, count, decision);
      end
      en = 1; clr = 1; bit_i = 0;
      @(negedge clk);
      checks++;
      if (count != 0) begin failures++; $display("clr with 0 bit gave %0d", count); end
      en = 0; clr = 0;
    end
    // saturation and enable
    @(negedge clk); clr = 1; en = 1; bit_i = 1;
    @(negedge clk); clr = 0;
    repeat (L + 10) @(negedge clk);
    checks++;
    if (count != L) begin failures++; $display("saturation %0d", count); end
    en = 0;
    @(negedge clk); clr = 1;
    @(negedge clk); clr = 0; bit_i = 1;
    repeat (5) @(negedge clk);
    checks++;
    if (count != 0) begin failures++; $display("count without en %0d", count); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
