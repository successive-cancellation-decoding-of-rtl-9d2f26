// Testbench for sc_controller: the h-node decision is driven from a known
// pattern indexed by the window in progress; checks the decoded word
// (pattern with frozen bits forced to 0), the start-to-done latency N*L+1,
// the window starts, the index sequence, busy and the one-clock clear.
module tb_sc_controller;
  localparam int N = 8, L = 16, M = $clog2(N);
  logic clk = 0, rst_n = 0, start = 0, h_decision = 0;
  logic [N-1:0] frozen = '0, u_hat;
  logic busy, done, clr, h_en, h_clr;
  logic [M-1:0] idx;
  int checks = 0, failures = 0;

  sc_controller #(.N(N), .L(L)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .frozen(frozen), .h_decision(h_decision),
    .busy(busy), .done(done), .clr(clr), .h_en(h_en), .h_clr(h_clr), .idx(idx), .u_hat(u_hat));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [N-1:0] pattern;
  int en_cnt, clr_cnt, hclr_cnt, lat, idx_err;
  logic [M-1:0] prev_idx, exp_idx;

  // decision of the window that just ended: indexed by the previous idx
  always @(negedge clk) h_decision = pattern[prev_idx];
  always @(posedge clk) begin
    prev_idx <= idx;
    if (busy) begin
      en_cnt   += h_en;
      hclr_cnt += h_clr;
    end
    clr_cnt += clr;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 6; t++) begin
      pattern = $urandom; frozen = $urandom;
      en_cnt = 0; clr_cnt = 0; hclr_cnt = 0; lat = 0; idx_err = 0;
      @(negedge clk); start = 1;
      @(posedge clk); #1;
      start = 0; frozen = ~frozen;   // must have been latched already
      checks++;
      if (!busy) begin failures++; $display("not busy after start"); end
      while (!done) begin
        // window w covers RUN clocks w*L .. w*L+L-1
        exp_idx = M'(lat / L > N - 1 ? N - 1 : lat / L);
        if (idx != exp_idx) idx_err++;
        @(posedge clk); #1;
        lat++;
      end
      checks++;
      if (lat != N * L + 1) begin failures++; $display("latency %0d expected %0d", lat, N * L + 1); end
      checks++;
      if (u_hat != (pattern & frozen)) begin
        failures++; $display("u_hat %b expected %b", u_hat, pattern & frozen);
      end
      checks++;
      if (en_cnt != N * L || hclr_cnt != N || clr_cnt != 1 || idx_err != 0) begin
        failures++; $display("en %0d h_clr %0d clr %0d idx errors %0d", en_cnt, hclr_cnt, clr_cnt, idx_err);
      end
      @(posedge clk); #1;
      checks++;
      if (busy || done) begin failures++; $display("busy/done after the end"); end
      if (t == 0) begin
        // start while idle is the only way in; the word is held afterwards
        repeat (5) @(posedge clk);
        #1 checks++;
        if (u_hat != (pattern & frozen)) begin failures++; $display("u_hat not held"); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
