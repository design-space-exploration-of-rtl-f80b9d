// tb_neural_core: self-checking test of the parallel first-layer core.
//
// A 16-input, 8-neuron core is loaded with random weights. Random input
// spike streams are fed pixel by pixel; a model integrates each spiking
// pixel into all neurons at once (IF rule with threshold subtraction) and
// lists the neurons that fired in ascending order. The events read from
// the core's FIFO must equal that list. Phase 1 reads the FIFO every clock
// and checks the cycle count of each time step (1 clock per silent pixel,
// 1 + N_HID per spiking pixel) and the step_end pulse. Phase 2 reads the
// FIFO rarely so that it fills and the scan stalls; the events must still
// be complete and in order.
module tb_neural_core;
  import snn_pkg::*;
  localparam int NI = 16, NH = 8;
  logic clk = 0, rst_n = 0, clear = 0;
  pot_t threshold = 40;
  logic w_we = 0;
  logic [2:0] w_neuron = 0;
  logic [3:0] w_addr = 0;
  weight_t w_data = 0;
  logic sp_valid = 0, sp_spike = 0, sp_ready, ev_rd, ev_empty, step_end, idle;
  logic [2:0] ev_addr;
  int checks = 0, failures = 0, stalls = 0, step_ends = 0;
  int wt [NH][NI];
  int pot [NH];
  int exp_q [$];
  bit fast_read = 1;

  neural_core #(.N_IN(NI), .N_HID(NH), .FIFO_DEPTH(4)) dut (.clk, .rst_n, .clear,
    .threshold, .w_we, .w_neuron, .w_addr, .w_data, .sp_valid, .sp_spike, .sp_ready,
    .ev_rd, .ev_addr, .ev_empty, .step_end, .idle);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // FIFO reader and comparator
  assign ev_rd = !ev_empty && (fast_read || ($urandom_range(0, 7) == 0));
  always @(posedge clk) if (rst_n) begin
    if (ev_rd) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; $display("unexpected event %0d", ev_addr); end
      else begin
        int e;
        e = exp_q.pop_front();
        if (int'(ev_addr) != e) begin
          failures++;
          $display("event %0d expected %0d", ev_addr, e);
        end
      end
    end
    if (step_end) step_ends++;
    if (dut.state == 1'b1 && dut.fifo_full && dut.mux_spike) stalls++;
  end

  task automatic model_spike(int p);
    for (int n = 0; n < NH; n++) begin
      int s = pot[n] + wt[n][p];
      if (s > int'(threshold)) begin pot[n] = s - int'(threshold); exp_q.push_back(n); end
      else pot[n] = s;
    end
  endtask

  task automatic time_step(int density);
    int t0, nspk, se0;
    bit spk;
    nspk = 0; se0 = step_ends;
    t0 = $time;
    for (int p = 0; p < NI; p++) begin
      spk = ($urandom_range(0, 99) < density);
      @(negedge clk);
      sp_valid = 1; sp_spike = spk;
      @(posedge clk);
      while (!sp_ready) @(posedge clk);
      if (spk) begin model_spike(p); nspk++; end
      #1;
    end
    @(negedge clk);
    sp_valid = 0;
    while (!idle) @(negedge clk);
    if (fast_read) begin
      // the step ends when the core is back to waiting for input
      checks++;
      if (($time - t0) / 10 != NI + nspk * NH + 1) begin
        failures++;
        $display("step took %0d cycles, expected %0d", ($time - t0) / 10, NI + nspk * NH + 1);
      end
    end
    repeat (2) @(negedge clk);
    checks++;
    if (step_ends != se0 + 1) begin failures++; $display("step_end count wrong"); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NH; n++)
      for (int p = 0; p < NI; p++) begin
        wt[n][p] = int'($urandom_range(0, 80)) - 20;
        @(negedge clk); w_we = 1; w_neuron = 3'(n); w_addr = 4'(p); w_data = weight_t'(wt[n][p]);
      end
    @(negedge clk); w_we = 0;
    for (int img = 0; img < 6; img++) begin
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int n = 0; n < NH; n++) pot[n] = 0;
      fast_read = (img < 3);
      for (int t = 0; t < 8; t++) time_step(10 + 10 * img);
      while (exp_q.size() != 0) @(negedge clk);
      repeat (4) @(negedge clk);
      // potentials match the model
      for (int n = 0; n < NH; n++) begin
        checks++;
        if (dut.potential[n] != pot_t'(pot[n])) begin
          failures++; $display("potential %0d = %0d expected %0d", n, dut.potential[n], pot[n]);
        end
      end
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FIFO-full stall never happened"); end
    $display("stall cycles: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
