// Testbench for xorshift32: checks the generated sequence against a model
// written out with explicit bit operations, the reset value and that the
// generator never reaches the all-zero state.
module tb_xorshift32;
  logic clk = 0, rst_n = 0;
  logic [31:0] rnd;
  int checks = 0, failures = 0;
  localparam logic [31:0] SEED = 32'h1234_5678;

  xorshift32 #(.SEED(SEED)) dut (.clk(clk), .rst_n(rst_n), .rnd(rnd));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [31:0] model(input logic [31:0] x);
    logic [31:0] a, b;
    a = x ^ {x[18:0], 13'b0};
    b = a ^ {17'b0, a[31:17]};
    return b ^ {b[26:0], 5'b0};
  endfunction

  initial begin
    logic [31:0] exp_v;
    repeat (2) @(posedge clk);
    #1;
    checks++; if (rnd !== SEED) begin failures++; $display("reset value %h", rnd); end
    rst_n = 1;
    exp_v = SEED;
    for (int i = 0; i < 5000; i++) begin
      @(posedge clk); #1;
      exp_v = model(exp_v);
      checks++;
      if (rnd !== exp_v || rnd == 0) begin
        failures++;
        if (failures < 5) $display("step %0d got %h exp %h", i, rnd, exp_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
