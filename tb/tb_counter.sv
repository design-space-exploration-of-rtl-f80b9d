// tb_counter: self-checking test of the modulo-N counter.
// Enables the counter at random, checks the count and the `last` flag
// against a model every clock, and checks clear.
module tb_counter;
  localparam int N = 13;
  logic clk = 0, rst_n = 0, clear = 0, enable = 0;
  logic [3:0] count;
  logic last;
  int checks = 0, failures = 0, model = 0, wraps = 0;

  counter #(.MODULO(N)) dut (.clk, .rst_n, .clear, .enable, .count, .last);
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      checks++;
      if (count !== 4'(model) || last !== (model == N - 1)) begin
        failures++;
        $display("mismatch count=%0d exp=%0d last=%0b", count, model, last);
      end
      enable = ($urandom_range(0, 3) != 0);
      clear  = ($urandom_range(0, 199) == 0);
      @(posedge clk); #1;
      if (clear) model = 0;
      else if (enable) begin
        if (model == N - 1) wraps++;
        model = (model == N - 1) ? 0 : model + 1;
      end
    end
    checks++;
    if (wraps < 10) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
