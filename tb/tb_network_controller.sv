// tb_network_controller: self-checking test of the SDRAM request queue.
//
// Three NPU stand-ins issue weight requests at random; each keeps its
// request up until accepted and then waits for its answer, as an NPU does.
// The SDRAM model answers after 3 clocks and randomly stalls. Checked: each
// answer goes to the NPU that asked (demux) and carries the data at
// BASE[npu] + address; the memory sees the requests in the order they were
// accepted (first come, first served); simultaneous requests occur and are
// all served; no answer reaches an NPU that is not waiting.
module tb_network_controller;
  import snn_pkg::*;
  localparam int NN = 3, LAW = 8, AW = 12;
  localparam int unsigned BASES [NN] = '{0, 256, 512};
  logic clk = 0, rst_n = 0;
  logic req_valid [NN], req_ready [NN], w_valid [NN];
  logic [LAW-1:0] req_addr [NN];
  weight_t w_data, mem_rdata;
  logic mem_req, mem_ready, mem_rvalid, idle;
  logic [AW-1:0] mem_addr;
  logic we = 0;
  logic [AW-1:0] waddr = 0;
  weight_t wdata = 0;
  int checks = 0, failures = 0, collisions = 0, served [NN];
  int order [$];
  bit waiting [NN];
  int exp_data [NN];

  function automatic weight_t content(int a);
    return weight_t'((a * 37 + 11) % 251);
  endfunction

  network_controller #(.N_NPU(NN), .LAW(LAW), .ADDR_W(AW), .QUEUE_DEPTH(4), .BASE(BASES)) dut (
    .clk, .rst_n, .req_valid, .req_addr, .req_ready, .w_valid, .w_data,
    .mem_req, .mem_addr, .mem_ready, .mem_rvalid, .mem_rdata, .idle);
  weight_sdram_model #(.DEPTH(1024), .ADDR_W(AW), .LATENCY(3), .STALL_PCT(30)) u_mem (
    .clk, .rst_n, .we, .waddr, .wdata, .req(mem_req), .addr(mem_addr),
    .ready(mem_ready), .rvalid(mem_rvalid), .rdata(mem_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n) begin
    int nreq;
    nreq = 0;
    for (int k = 0; k < NN; k++) if (req_valid[k]) nreq++;
    if (nreq > 1) collisions++;
    for (int k = 0; k < NN; k++) begin
      if (req_valid[k] && req_ready[k]) begin
        order.push_back(int'(BASES[k]) + int'(req_addr[k]));
        exp_data[k] = int'(BASES[k]) + int'(req_addr[k]);
      end
      if (w_valid[k]) begin
        checks++;
        if (!waiting[k] || w_data !== content(exp_data[k])) begin
          failures++;
          $display("bad answer to NPU %0d: %0d expected %0d", k, w_data, content(exp_data[k]));
        end
        served[k]++;
      end
    end
    if (mem_req && mem_ready) begin
      int e;
      checks++;
      e = order.pop_front();
      if (int'(mem_addr) != e) begin failures++; $display("memory address %0d expected %0d", mem_addr, e); end
    end
  end

  for (genvar k = 0; k < NN; k++) begin : g_npu
    initial begin
      req_valid[k] = 0; req_addr[k] = 0; waiting[k] = 0;
      wait (rst_n);
      repeat (300) begin
        repeat ($urandom_range(0, 1)) @(negedge clk);
        req_valid[k] = 1; req_addr[k] = LAW'($urandom);
        @(posedge clk);
        while (!req_ready[k]) @(posedge clk);
        #1 req_valid[k] = 0; waiting[k] = 1;
        @(posedge clk);
        while (!w_valid[k]) @(posedge clk);
        #1 waiting[k] = 0;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    for (int a = 0; a < 1024; a++) begin
      @(negedge clk); we = 1; waddr = AW'(a); wdata = content(a);
    end
    @(negedge clk); we = 0;
    rst_n = 1;
    repeat (20) @(posedge clk);
    while (!(served[0] == 300 && served[1] == 300 && served[2] == 300)) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (!idle) failures++;
    checks++;
    if (collisions == 0) begin failures++; $display("no simultaneous requests"); end
    $display("simultaneous request cycles: %0d", collisions);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
