// tb_winner_class: self-checking test of the winner class selection.
// Output-layer events are pushed through a FIFO into the block. A model
// counts them per class and applies the selected rule after every counted
// event; the test checks the counts, the stop flag, the frozen class and
// that events after the decision are drained but not counted. Both rules
// are exercised, with a clear between runs.
module tb_winner_class;
  import snn_pkg::*;
  localparam int N = 10, CW = 8;
  logic clk = 0, rst_n = 0, clear = 0;
  logic wr = 0, ev_rd, ev_empty, ev_full;
  logic [3:0] wdata = 0, ev_addr;
  logic [4:0] lvl;
  select_e sel = SEL_TERMINATE_DELTA;
  logic [CW-1:0] delta = 4, max_value = 4;
  logic stop;
  logic [3:0] class_idx;
  logic [CW-1:0] act [N];
  int checks = 0, failures = 0, td_stops = 0, mt_stops = 0;

  fifo #(.WIDTH(4), .DEPTH(16)) u_f (.clk, .rst_n, .wr_en(wr), .in_data(wdata),
    .rd_en(ev_rd), .out_data(ev_addr), .empty(ev_empty), .full(ev_full), .level(lvl));
  winner_class #(.N(N), .CW(CW)) dut (.clk, .rst_n, .clear, .ev_empty, .ev_addr,
    .ev_rd, .sel, .delta, .max_value, .stop, .class_idx, .act);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(select_e s, int d, int mv);
    int cnt [N];
    int m1, m2, idx, exp_class;
    bit decided;
    @(negedge clk);
    sel = s; delta = CW'(d); max_value = CW'(mv); clear = 1;
    @(negedge clk); clear = 0;
    for (int i = 0; i < N; i++) cnt[i] = 0;
    decided = 0; exp_class = 0;
    for (int e = 0; e < 60; e++) begin
      // one event at a time, biased towards class 3 or 6
      @(negedge clk);
      wr = 1;
      wdata = ($urandom_range(0, 2) == 0) ? 4'((e % 2) ? 3 : 6) : 4'($urandom_range(0, N - 1));
      @(negedge clk); wr = 0;
      if (!decided) cnt[wdata]++;
      @(negedge clk); @(negedge clk);
      // model decision after this event
      m1 = -1; idx = 0;
      for (int i = 0; i < N; i++) if (cnt[i] > m1) begin m1 = cnt[i]; idx = i; end
      m2 = 0;
      for (int i = 0; i < N; i++) if (i != idx && cnt[i] > m2) m2 = cnt[i];
      if (!decided && ((s == SEL_TERMINATE_DELTA) ? (m1 - m2 > d) : (m1 > mv))) begin
        decided = 1; exp_class = idx;
        if (s == SEL_TERMINATE_DELTA) td_stops++; else mt_stops++;
      end
      for (int i = 0; i < N; i++) begin
        checks++;
        if (act[i] !== CW'(cnt[i])) begin
          failures++;
          $display("count mismatch class %0d: %0d exp %0d", i, act[i], cnt[i]);
        end
      end
      checks++;
      if (stop !== decided || (decided && class_idx !== 4'(exp_class))) begin
        failures++;
        $display("decision mismatch stop=%0b/%0b class=%0d/%0d", stop, decided, class_idx, exp_class);
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 30; r++) begin
      run(SEL_TERMINATE_DELTA, $urandom_range(2, 6), 4);
      run(SEL_MAX_TERMINATE, 4, $urandom_range(3, 9));
    end
    checks++;
    if (td_stops == 0 || mt_stops == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
