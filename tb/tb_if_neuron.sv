// tb_if_neuron: self-checking test of the integrate-and-fire neuron.
//
// Drives random weights, spikes, enables and thresholds (including weights
// that push the potential into saturation) and compares the potential and
// the output spike after every clock with a reference model of the IF rule:
// s = p + w*spike (saturated to 16 bits); fire when s > threshold; then
// p = s - threshold, else p = s. Also checks clear and that a disabled
// neuron holds its state.
module tb_if_neuron;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, enable = 0, spike = 0;
  weight_t w = 0;
  pot_t th = 0, pot;
  logic out_spike;
  int checks = 0, failures = 0;
  int ref_p = 0;
  logic ref_s = 0;

  if_neuron dut (.clk, .rst_n, .clear, .enable, .spike, .weight(w),
                 .threshold(th), .out_spike, .potential(pot));

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(logic en, logic sp, int wv, int thv, logic clr);
    int s;
    @(negedge clk);
    enable = en; spike = sp; w = weight_t'(wv); th = pot_t'(thv); clear = clr;
    @(posedge clk); #1;
    if (clr) begin ref_p = 0; ref_s = 0; end
    else if (en) begin
      s = ref_p + (sp ? wv : 0);
      if (s > 32767) s = 32767;
      if (s < -32768) s = -32768;
      ref_s = (s > thv);
      ref_p = ref_s ? s - thv : s;
    end
    checks++;
    if (pot !== pot_t'(ref_p) || out_spike !== ref_s) begin
      failures++;
      if (failures < 10)
        $display("mismatch: pot=%0d exp=%0d spike=%0b exp=%0b", pot, ref_p, out_spike, ref_s);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    // a hand-worked case: threshold 100, weights 60, 60 -> fires on the
    // second, potential 20 left
    step(1, 1, 60, 100, 0);
    step(1, 1, 60, 100, 0);
    if (!(out_spike && pot == 20)) failures++;
    checks++;
    step(0, 1, 60, 100, 0);   // disabled: holds
    step(1, 0, 60, 100, 0);   // no spike: integrates 0
    step(0, 0, 0, 100, 1);    // clear
    for (int i = 0; i < 20000; i++) begin
      int wv, thv;
      wv  = int'($urandom_range(0, 255)) - 128;
      thv = (i % 1000 < 500) ? int'($urandom_range(1, 400)) : 30000;
      step(($urandom_range(0, 3) != 0), ($urandom_range(0, 3) != 0), wv, thv,
           ($urandom_range(0, 999) == 0));
    end
    // drive towards positive saturation
    step(0, 0, 0, 0, 1);
    for (int i = 0; i < 400; i++) step(1, 1, 127, 32767, 0);
    step(0, 0, 0, 0, 1);
    for (int i = 0; i < 400; i++) step(1, 1, -128, 32767, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
