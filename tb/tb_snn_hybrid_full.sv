// tb_snn_hybrid_full: end-to-end test of snn_hybrid at its default size,
// the 784-300-300-300-10 network with 512-entry FIFOs.
//
// The first-layer weights (784 x 300) are written through the core weight
// port, the 183,000 deeper-layer weights are written into the SDRAM model
// (latency 3, 10 % random stalls). One image is classified four times, once
// per input code of the latency comparison: Jittered Periodic with
// Terminate Delta, then Spike Select (raised first-layer threshold), First
// Spike and Single Burst, each with Max Terminate. After each the decision, class
// and per-class counts must equal the reference model (snn_ref_model.svh).
// The cycle count per image and the number of events per layer are printed.
// Thresholds are set high so that each layer fires sparsely, as in a
// trained network; with the random test weights a low threshold would make
// every neuron fire on almost every event. First Spike sends one spike per
// pixel in all, so its run uses a lower first-layer threshold.
module tb_snn_hybrid_full;
  import snn_pkg::*;
  localparam int N_LAYERS = 5;
  localparam int unsigned TOPO [N_LAYERS] = '{784, 300, 300, 300, 10};
  localparam int MAXN = 784;
  localparam int AW = 24;

  `include "snn_ref_model.svh"

  logic clk = 0, rst_n = 0;
  logic pix_we = 0;
  logic [9:0] pix_addr = 0;
  logic [7:0] pix_data = 0;
  logic core_w_we = 0;
  logic [8:0] core_w_neuron = 0;
  logic [9:0] core_w_addr = 0;
  weight_t core_w_data = 0;
  coding_e coding = CODE_JITTERED_PERIODIC;
  logic [15:0] f_min = 0, f_max = 16'h4000, t_min = 4, window = 12, max_steps = 20;
  pot_t threshold [N_LAYERS-1];
  select_e sel = SEL_TERMINATE_DELTA;
  logic [7:0] delta = 4, max_value = 4;
  logic start = 0, done, decided;
  logic [3:0] class_idx;
  logic [7:0] activations [10];
  logic [15:0] t_step;
  logic mem_req, mem_ready, mem_rvalid;
  logic [AW-1:0] mem_addr;
  weight_t mem_rdata;
  logic sd_we = 0;
  logic [AW-1:0] sd_waddr = 0;
  weight_t sd_wdata = 0;

  int checks = 0, failures = 0;

  snn_hybrid dut (
    .clk, .rst_n, .pix_we, .pix_addr, .pix_data, .core_w_we, .core_w_neuron,
    .core_w_addr, .core_w_data, .coding, .f_min, .f_max, .t_min, .window,
    .max_steps, .threshold, .sel, .delta, .max_value, .start, .done, .decided,
    .class_idx, .activations, .t_step, .mem_req, .mem_addr, .mem_ready,
    .mem_rvalid, .mem_rdata);

  weight_sdram_model #(.DEPTH(1 << 18), .ADDR_W(AW), .LATENCY(3), .STALL_PCT(10)) u_sdram (
    .clk, .rst_n, .we(sd_we), .waddr(sd_waddr), .wdata(sd_wdata), .req(mem_req),
    .addr(mem_addr), .ready(mem_ready), .rvalid(mem_rvalid), .rdata(mem_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int pix_idx = 0;
  always @(posedge clk) if (rst_n) begin
    if (start) pix_idx = 0;
    else if (dut.sp_valid && dut.sp_ready) begin
      if (dut.sp_spike) ref_event(1, pix_idx);
      pix_idx = (pix_idx + 1) % int'(TOPO[0]);
    end
  end

  task automatic load_weights(int seed);
    int a;
    m_seed = seed;
    for (int n = 0; n < TOPO[1]; n++)
      for (int p = 0; p < TOPO[0]; p++) begin
        @(negedge clk);
        core_w_we = 1; core_w_neuron = 9'(n); core_w_addr = 10'(p);
        core_w_data = weight_t'(ref_weight(1, p, n, seed));
      end
    @(negedge clk); core_w_we = 0;
    a = 0;
    for (int l = 2; l < N_LAYERS; l++)
      for (int e = 0; e < TOPO[l-1]; e++)
        for (int j = 0; j < TOPO[l]; j++) begin
          @(negedge clk);
          sd_we = 1; sd_waddr = AW'(a); sd_wdata = weight_t'(ref_weight(l, e, j, seed));
          a++;
        end
    @(negedge clk); sd_we = 0;
  endtask

  task automatic load_image(int seed);
    for (int p = 0; p < TOPO[0]; p++) begin
      @(negedge clk);
      pix_we = 1; pix_addr = 10'(p);
      // a bright disc on a dark background
      pix_data = (((p % 28) - 14) * ((p % 28) - 14) + ((p / 28) - 14 + seed) * ((p / 28) - 14 + seed) < 64)
                 ? 8'(200 + (p * 13) % 56) : 8'd0;
    end
    @(negedge clk); pix_we = 0;
  endtask

  task automatic classify(coding_e c, select_e s, int thr1, string what);
    longint t0;
    sel = s; coding = c;
    threshold[0] = pot_t'(thr1);
    for (int l = 0; l < N_LAYERS - 1; l++) m_thr[l] = int'(threshold[l]);
    m_sel = int'(s); m_delta = int'(delta); m_maxv = int'(max_value);
    @(negedge clk);
    ref_reset();
    start = 1;
    @(negedge clk); start = 0;
    t0 = $time;
    @(negedge clk);
    while (!done) @(negedge clk);
    checks++;
    if (decided !== m_decided) begin
      failures++; $display("%s: decided=%0b model=%0b", what, decided, m_decided);
    end
    checks++;
    if (int'(class_idx) != (m_decided ? m_class : ref_leader())) begin
      failures++; $display("%s: class=%0d model=%0d", what, class_idx, m_decided ? m_class : ref_leader());
    end
    for (int i = 0; i < TOPO[N_LAYERS-1]; i++) begin
      checks++;
      if (int'(activations[i]) != m_cnt[i]) begin
        failures++; $display("%s: count[%0d]=%0d model=%0d", what, i, activations[i], m_cnt[i]);
      end
    end
    checks++;
    if (m_layer_events[N_LAYERS-1] == 0) begin
      failures++; $display("%s: no output event", what);
    end
    $display("%s: class %0d decided %0b after %0d steps, %0d cycles; events per layer %0d %0d %0d %0d %0d",
             what, class_idx, decided, t_step + 1, ($time - t0) / 10,
             m_layer_events[0], m_layer_events[1], m_layer_events[2], m_layer_events[3], m_layer_events[4]);
  endtask

  initial begin
    threshold[0] = 3000; threshold[1] = 2500; threshold[2] = 2500; threshold[3] = 1200;
    repeat (2) @(posedge clk);
    rst_n = 1;
    load_weights(7);
    load_image(0);
    classify(CODE_JITTERED_PERIODIC, SEL_TERMINATE_DELTA, 3000, "JP/TD");
    classify(CODE_JITTERED_PERIODIC, SEL_MAX_TERMINATE, 6000, "SpikeSelect/Max");
    classify(CODE_FIRST_SPIKE, SEL_MAX_TERMINATE, 700, "FS/Max");
    classify(CODE_SINGLE_BURST, SEL_MAX_TERMINATE, 3000, "SB/Max");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
