// snn_workload_run: one end-to-end classification of a given network size,
// used by tb_snn_topologies to run several of the evaluated topologies side
// by side.
//
// It instantiates snn_hybrid with N_LAYERS layers of sizes L0, L1, ..., the SDRAM
// model (latency 3, 10 % random stalls) and the reference model
// (snn_ref_model.svh). After reset it loads the first-layer weights through
// the core weight port and the deeper weights into the SDRAM model, loads
// an image (a bright disc), classifies it with Jittered Periodic input and
// Max Terminate (max-value 4), and compares the decision, the class and every spike
// count with the model. It then reports its check and failure counts and
// raises `finished`. Thresholds are set high (sparse firing) because the
// weights are random, not trained.
module snn_workload_run
  import snn_pkg::*;
#(
  parameter int unsigned N_LAYERS = 3,
  parameter int unsigned L0 = 784,
  parameter int unsigned L1 = 100,
  parameter int unsigned L2 = 10,
  parameter int unsigned L3 = 0,
  parameter int unsigned SEED = 1
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output logic finished
);
  typedef int unsigned topo_t [N_LAYERS];
  function automatic topo_t make_topo();
    topo_t t;
    int unsigned all [4];
    all = '{L0, L1, L2, L3};
    for (int i = 0; i < int'(N_LAYERS); i++) t[i] = all[i];
    return t;
  endfunction
  localparam topo_t TOPO = make_topo();
  localparam int MAXN = 784;
  localparam int AW = 24;
  localparam int unsigned IAW = $clog2(TOPO[0]);
  localparam int unsigned HAW = $clog2(TOPO[1]);
  localparam int unsigned OAW = $clog2(TOPO[N_LAYERS-1]);

  `include "snn_ref_model.svh"

  logic rst_n = 0;
  logic pix_we = 0;
  logic [IAW-1:0] pix_addr = 0;
  logic [7:0] pix_data = 0;
  logic core_w_we = 0;
  logic [HAW-1:0] core_w_neuron = 0;
  logic [IAW-1:0] core_w_addr = 0;
  weight_t core_w_data = 0;
  coding_e coding = CODE_JITTERED_PERIODIC;
  logic [15:0] f_min = 0, f_max = 16'h4000, t_min = 4, window = 12, max_steps = 20;
  pot_t threshold [N_LAYERS-1];
  select_e sel = SEL_MAX_TERMINATE;
  logic [7:0] delta = 4, max_value = 4;
  logic start = 0, done, decided;
  logic [OAW-1:0] class_idx;
  logic [7:0] activations [TOPO[N_LAYERS-1]];
  logic [15:0] t_step;
  logic mem_req, mem_ready, mem_rvalid;
  logic [AW-1:0] mem_addr;
  weight_t mem_rdata;
  logic sd_we = 0;
  logic [AW-1:0] sd_waddr = 0;
  weight_t sd_wdata = 0;

  initial begin checks = 0; failures = 0; finished = 0; end

  snn_hybrid #(.N_LAYERS(N_LAYERS), .TOPOLOGY(TOPO)) dut (
    .clk, .rst_n, .pix_we, .pix_addr, .pix_data, .core_w_we, .core_w_neuron,
    .core_w_addr, .core_w_data, .coding, .f_min, .f_max, .t_min, .window,
    .max_steps, .threshold, .sel, .delta, .max_value, .start, .done, .decided,
    .class_idx, .activations, .t_step, .mem_req, .mem_addr, .mem_ready,
    .mem_rvalid, .mem_rdata);

  weight_sdram_model #(.DEPTH(1 << 18), .ADDR_W(AW), .LATENCY(3), .STALL_PCT(10)) u_sdram (
    .clk, .rst_n, .we(sd_we), .waddr(sd_waddr), .wdata(sd_wdata), .req(mem_req),
    .addr(mem_addr), .ready(mem_ready), .rvalid(mem_rvalid), .rdata(mem_rdata));

  int pix_idx = 0;
  always @(posedge clk) if (rst_n) begin
    if (start) pix_idx = 0;
    else if (dut.sp_valid && dut.sp_ready) begin
      if (dut.sp_spike) ref_event(1, pix_idx);
      pix_idx = (pix_idx + 1) % int'(TOPO[0]);
    end
  end

  initial begin
    int a;
    longint t0;
    for (int l = 0; l < N_LAYERS - 1; l++)
      threshold[l] = (l == 0) ? pot_t'(3000) : (l == N_LAYERS - 2) ? pot_t'(1200) : pot_t'(2500);
    repeat (2) @(posedge clk);
    rst_n = 1;
    m_seed = int'(SEED);
    for (int n = 0; n < TOPO[1]; n++)
      for (int p = 0; p < TOPO[0]; p++) begin
        @(negedge clk);
        core_w_we = 1; core_w_neuron = HAW'(n); core_w_addr = IAW'(p);
        core_w_data = weight_t'(ref_weight(1, p, n, m_seed));
      end
    @(negedge clk); core_w_we = 0;
    a = 0;
    for (int l = 2; l < N_LAYERS; l++)
      for (int e = 0; e < TOPO[l-1]; e++)
        for (int j = 0; j < TOPO[l]; j++) begin
          @(negedge clk);
          sd_we = 1; sd_waddr = AW'(a); sd_wdata = weight_t'(ref_weight(l, e, j, m_seed));
          a++;
        end
    @(negedge clk); sd_we = 0;
    for (int p = 0; p < TOPO[0]; p++) begin
      @(negedge clk);
      pix_we = 1; pix_addr = IAW'(p);
      pix_data = (((p % 28) - 14) * ((p % 28) - 14) + ((p / 28) - 12) * ((p / 28) - 12) < 64)
                 ? 8'(200 + (p * 13) % 56) : 8'd0;
    end
    @(negedge clk); pix_we = 0;
    for (int l = 0; l < N_LAYERS - 1; l++) m_thr[l] = int'(threshold[l]);
    m_sel = int'(sel); m_delta = int'(delta); m_maxv = int'(max_value);
    ref_reset();
    start = 1;
    @(negedge clk); start = 0;
    t0 = $time;
    @(negedge clk);
    while (!done) @(negedge clk);
    checks++;
    if (decided !== m_decided) begin
      failures++; $display("%m: decided=%0b model=%0b", decided, m_decided);
    end
    checks++;
    if (int'(class_idx) != (m_decided ? m_class : ref_leader())) begin
      failures++; $display("%m: class=%0d model=%0d", class_idx, m_decided ? m_class : ref_leader());
    end
    for (int i = 0; i < TOPO[N_LAYERS-1]; i++) begin
      checks++;
      if (int'(activations[i]) != m_cnt[i]) begin
        failures++; $display("%m: count[%0d]=%0d model=%0d", i, activations[i], m_cnt[i]);
      end
    end
    checks++;
    if (m_layer_events[N_LAYERS-1] == 0) begin
      failures++; $display("%m: no output event");
    end
    begin
      string ev;
      ev = "";
      for (int l = 0; l < int'(N_LAYERS); l++) ev = {ev, $sformatf(" %0d", m_layer_events[l])};
      $display("%m: %0d layers, class %0d decided %0b after %0d steps, %0d cycles; events into layers 1..%0d and to the winner unit:%s",
               N_LAYERS, class_idx, decided, t_step + 1, ($time - t0) / 10, N_LAYERS - 1, ev);
    end
    finished = 1;
  end
endmodule
