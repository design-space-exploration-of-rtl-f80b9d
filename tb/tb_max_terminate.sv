// tb_max_terminate: self-checking test of the Max Terminate rule.
// Random activation vectors and max-values; the model expects the largest
// count, its (lowest) index, and stop = max > max_value.
module tb_max_terminate;
  localparam int N = 10, CW = 8;
  logic [CW-1:0] act [N];
  logic [CW-1:0] max_value, max_act;
  logic [3:0] class_idx;
  logic stop;
  int checks = 0, failures = 0, stops = 0;

  max_terminate #(.N(N), .CW(CW)) dut (.act, .max_value, .max_act, .class_idx, .stop);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 20000; it++) begin
      int m1, idx;
      logic exp_stop;
      for (int i = 0; i < N; i++) act[i] = CW'($urandom_range(0, 10));
      max_value = CW'($urandom_range(0, 10));
      #1;
      m1 = -1; idx = 0;
      for (int i = 0; i < N; i++) if (int'(act[i]) > m1) begin m1 = act[i]; idx = i; end
      exp_stop = m1 > int'(max_value);
      if (exp_stop) stops++;
      checks++;
      if (max_act !== CW'(m1) || class_idx !== 4'(idx) || stop !== exp_stop) begin
        failures++;
        if (failures < 10)
          $display("mismatch max=%0d/%0d idx=%0d/%0d stop=%0b/%0b",
                   max_act, m1, class_idx, idx, stop, exp_stop);
      end
    end
    // hand-worked: max-value 4, counts 4 -> no stop; 5 -> stop
    for (int i = 0; i < N; i++) act[i] = 0;
    act[7] = 4; max_value = 4; #1;
    checks++; if (stop) failures++;
    act[7] = 5; #1;
    checks++; if (!(stop && class_idx == 7)) failures++;
    checks++; if (stops < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
