// tb_npu: self-checking test of the time-multiplexed Neural Processing Unit.
//
// A 6-input, 5-neuron NPU takes events from a FIFO filled by the test and
// fetches weights from a memory model that answers after LAT clocks and
// sometimes refuses requests. A model integrates each event into all five
// logical neurons in order and lists the neurons that fire; the NPU's
// output events must match that list, and every weight request must carry
// the address event * N_NEU + j in sequence. With a memory that always
// accepts and the output read every clock, one event must take
// 1 + N_NEU * (LAT + 2) clocks. A slow reader fills the output FIFO to
// exercise the request hold-off; clear must zero the potentials.
module tb_npu;
  import snn_pkg::*;
  localparam int NP = 6, NN = 5, LAT = 3;
  logic clk = 0, rst_n = 0, clear = 0;
  pot_t threshold = 50;
  logic in_wr = 0, in_empty, in_rd, in_full;
  logic [2:0] in_wdata = 0, in_addr;
  logic [3:0] in_lvl;
  logic req_valid, req_ready = 1, w_valid = 0, out_rd, out_empty, idle;
  logic [4:0] req_addr;
  weight_t w_data = 0;
  logic [2:0] out_addr;
  int checks = 0, failures = 0, holdoffs = 0;
  int wt [NP][NN];
  int pot [NN];
  int exp_ev [$];
  int exp_req [$];
  bit fast = 1, always_ready = 1;
  int countdown = 0;
  int pending_addr;

  fifo #(.WIDTH(3), .DEPTH(8)) u_in (.clk, .rst_n, .wr_en(in_wr), .in_data(in_wdata),
    .rd_en(in_rd), .out_data(in_addr), .empty(in_empty), .full(in_full), .level(in_lvl));
  npu #(.N_PRE(NP), .N_NEU(NN), .FIFO_DEPTH(2)) dut (.clk, .rst_n, .clear, .threshold,
    .in_empty, .in_addr, .in_rd, .req_valid, .req_addr, .req_ready, .w_valid, .w_data,
    .out_rd, .out_addr, .out_empty, .idle);

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // weight memory model
  always @(posedge clk) begin
    w_valid <= 0;
    if (countdown > 0) begin
      countdown <= countdown - 1;
      if (countdown == 1) begin
        w_valid <= 1;
        w_data  <= weight_t'(wt[pending_addr / NN][pending_addr % NN]);
      end
    end
    if (req_valid && req_ready) begin
      int e;
      checks++;
      e = exp_req.pop_front();
      if (int'(req_addr) != e) begin failures++; $display("request %0d expected %0d", req_addr, e); end
      pending_addr <= int'(req_addr);
      countdown    <= LAT;
    end
    req_ready <= always_ready ? 1'b1 : ($urandom_range(0, 1) == 1);
    if (dut.state == 2'd2 && dut.fifo_full) holdoffs++;
  end

  // output reader
  assign out_rd = !out_empty && (fast || ($urandom_range(0, 9) == 0));
  always @(posedge clk) if (rst_n && out_rd) begin
    int e;
    checks++;
    e = exp_ev.pop_front();
    if (int'(out_addr) != e) begin failures++; $display("event %0d expected %0d at %0t q=%0d", out_addr, e, $time, exp_ev.size()); end
  end

  task automatic send(int e);
    for (int j = 0; j < NN; j++) begin
      int s;
      exp_req.push_back(e * NN + j);
      s = pot[j] + wt[e][j];
      if (s > int'(threshold)) begin pot[j] = s - int'(threshold); exp_ev.push_back(j); end
      else pot[j] = s;
    end
    @(negedge clk); in_wr = 1; in_wdata = 3'(e);
    @(negedge clk); in_wr = 0;
  endtask

  initial begin
    int t0;
    for (int e = 0; e < NP; e++) for (int j = 0; j < NN; j++) wt[e][j] = int'($urandom_range(0, 90)) - 20;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < NN; j++) pot[j] = 0;
    while (!idle) @(negedge clk);
    // timed events
    for (int k = 0; k < 8; k++) begin
      send($urandom_range(0, NP - 1));
      t0 = $time;
      @(negedge clk);
      while (!(idle && in_empty)) @(negedge clk);
      checks++;
      if (($time - t0) / 10 != 1 + NN * (LAT + 2)) begin
        failures++; $display("event took %0d clocks, expected %0d", ($time - t0) / 10, 1 + NN * (LAT + 2));
      end
    end
    // bursts with back-pressure on both sides
    fast = 0; always_ready = 0;
    for (int k = 0; k < 200; k++) begin
      while (in_full) @(negedge clk);
      send($urandom_range(0, NP - 1));
    end
    while (!(idle && in_empty && exp_ev.size() == 0)) @(negedge clk);
    for (int j = 0; j < NN; j++) begin
      checks++;
      if (dut.pot[j] != pot_t'(pot[j])) begin failures++; $display("pot %0d mismatch", j); end
    end
    // clear
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    while (!idle) @(negedge clk);
    for (int j = 0; j < NN; j++) begin
      checks++;
      if (dut.pot[j] != 0) failures++;
    end
    checks++;
    if (holdoffs == 0) begin failures++; $display("output FIFO hold-off never happened"); end
    checks++;
    if (exp_req.size() != 0) failures++;
    $display("hold-off cycles: %0d", holdoffs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
