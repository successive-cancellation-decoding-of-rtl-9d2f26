// Testbench for rerandomizer: compares the output with a model of the
// shuffle buffer, checks that the number of ones is conserved and that the
// output order differs from the input order.
module tb_rerandomizer;
  localparam int D = 4;
  logic clk = 0, rst_n = 0, bit_i = 0, bit_o;
  logic [$clog2(D)-1:0] sel = 0;
  int checks = 0, failures = 0;

  rerandomizer #(.D(D)) dut (.clk(clk), .rst_n(rst_n), .sel(sel), .bit_i(bit_i), .bit_o(bit_o));

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic model[D];
    int ones_in = 0, ones_out = 0, moved = 0;
    logic prev_in;
    for (int i = 0; i < D; i++) model[i] = i[0];
    repeat (2) @(posedge clk);
    rst_n = 1;
    prev_in = 0;
    for (int i = 0; i < 20000; i++) begin
      @(negedge clk);
      sel = $urandom; bit_i = ($urandom % 10) < 3;
      #1;
      checks++;
      if (bit_o !== model[sel]) begin failures++; if (failures < 5) $display("cycle %0d got %b exp %b", i, bit_o, model[sel]); end
      ones_out += bit_o; ones_in += bit_i;
      if (bit_o != prev_in) moved++;
      prev_in = bit_i;
      model[sel] = bit_i;
    end
    // out = initial slots (2 ones) + in - final slots
    checks++;
    begin
      int left = 0;
      for (int i = 0; i < D; i++) left += model[i];
      if (ones_out != ones_in + D / 2 - left) begin failures++; $display("ones in %0d out %0d", ones_in, ones_out); end
    end
    checks++;
    if (moved < 2000) begin failures++; $display("stream not reordered (%0d)", moved); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
