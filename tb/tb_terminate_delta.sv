// tb_terminate_delta: self-checking test of the Terminate Delta rule.
// Random activation vectors (with many ties) and delta values; the model
// finds the largest count (lowest index on a tie), the largest of the
// others, and expects stop = (max1 - max2) > delta.
module tb_terminate_delta;
  localparam int N = 10, CW = 8;
  logic [CW-1:0] act [N];
  logic [CW-1:0] delta, max1, max2;
  logic [3:0] class_idx;
  logic stop;
  int checks = 0, failures = 0, stops = 0;

  terminate_delta #(.N(N), .CW(CW)) dut (.act, .delta, .max1, .max2, .class_idx, .stop);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int it = 0; it < 20000; it++) begin
      int m1, m2, idx;
      logic exp_stop;
      for (int i = 0; i < N; i++)
        act[i] = (it % 2) ? CW'($urandom_range(0, 12)) : CW'($urandom_range(0, 255));
      delta = CW'($urandom_range(0, 8));
      #1;
      m1 = -1; idx = 0;
      for (int i = 0; i < N; i++) if (int'(act[i]) > m1) begin m1 = act[i]; idx = i; end
      m2 = 0;
      for (int i = 0; i < N; i++) if (i != idx && int'(act[i]) > m2) m2 = act[i];
      exp_stop = (m1 - m2) > int'(delta);
      if (exp_stop) stops++;
      checks++;
      if (max1 !== CW'(m1) || max2 !== CW'(m2) || class_idx !== 4'(idx) || stop !== exp_stop) begin
        failures++;
        if (failures < 10)
          $display("mismatch max1=%0d/%0d max2=%0d/%0d idx=%0d/%0d stop=%0b/%0b",
                   max1, m1, max2, m2, class_idx, idx, stop, exp_stop);
      end
    end
    // hand-worked: counts 4,9,3 -> delta 4: 9-4=5>4 stops, delta 5 does not
    for (int i = 0; i < N; i++) act[i] = 0;
    act[0] = 4; act[1] = 9; act[2] = 3; delta = 4; #1;
    checks++; if (!(stop && class_idx == 1 && max2 == 4)) failures++;
    delta = 5; #1;
    checks++; if (stop) failures++;
    checks++; if (stops < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
