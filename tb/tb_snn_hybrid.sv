// tb_snn_hybrid: end-to-end test of the Hybrid Architecture at reduced size.
//
// Network 32-16-12-10-6 (same depth as the 784-300-300-300-10 default: a
// neural core and three NPUs), small FIFOs so that back-pressure happens,
// and an SDRAM model with latency and random stalls. Several images are
// classified with each input code and both stop rules, including the Spike
// Select setting (raised first-layer threshold) and a run that ends on the
// step limit. After each image the decision, the class and the per-class
// spike counts must equal the reference model (snn_ref_model.svh) fed with
// the same input spikes. The test also counts how often each mechanism
// occurred (core scan stalled by a full FIFO, NPU request held off by a
// full FIFO, simultaneous NPU requests, SDRAM stalls, both stop rules, step
// limit, each input code) and fails for any that never did.
module tb_snn_hybrid;
  import snn_pkg::*;
  localparam int N_LAYERS = 5;
  localparam int unsigned TOPO [N_LAYERS] = '{32, 16, 12, 10, 6};
  localparam int MAXN = 32;
  localparam int AW = 24;

  `include "snn_ref_model.svh"

  logic clk = 0, rst_n = 0;
  logic pix_we = 0;
  logic [4:0] pix_addr = 0;
  logic [7:0] pix_data = 0;
  logic core_w_we = 0;
  logic [3:0] core_w_neuron = 0;
  logic [4:0] core_w_addr = 0;
  weight_t core_w_data = 0;
  coding_e coding = CODE_JITTERED_PERIODIC;
  logic [15:0] f_min = 0, f_max = 16'h6000, t_min = 4, window = 12, max_steps = 40;
  pot_t threshold [N_LAYERS-1];
  select_e sel = SEL_TERMINATE_DELTA;
  logic [7:0] delta = 3, max_value = 4;
  logic start = 0, done, decided;
  logic [2:0] class_idx;
  logic [7:0] activations [6];
  logic [15:0] t_step;
  logic mem_req, mem_ready, mem_rvalid;
  logic [AW-1:0] mem_addr;
  weight_t mem_rdata;
  logic sd_we = 0;
  logic [AW-1:0] sd_waddr = 0;
  weight_t sd_wdata = 0;

  int checks = 0, failures = 0;
  int n_core_stall = 0, n_npu_holdoff = 0, n_collide = 0, n_mem_stall = 0;
  int n_td = 0, n_mt = 0, n_limit = 0, n_code [3] = '{0, 0, 0}, n_ss = 0;

  snn_hybrid #(.N_LAYERS(N_LAYERS), .TOPOLOGY(TOPO), .CORE_FIFO_DEPTH(4),
               .NPU_FIFO_DEPTH(4), .ADDR_W(AW)) dut (
    .clk, .rst_n, .pix_we, .pix_addr, .pix_data, .core_w_we, .core_w_neuron,
    .core_w_addr, .core_w_data, .coding, .f_min, .f_max, .t_min, .window,
    .max_steps, .threshold, .sel, .delta, .max_value, .start, .done, .decided,
    .class_idx, .activations, .t_step, .mem_req, .mem_addr, .mem_ready,
    .mem_rvalid, .mem_rdata);

  weight_sdram_model #(.DEPTH(4096), .ADDR_W(AW), .LATENCY(2), .STALL_PCT(20)) u_sdram (
    .clk, .rst_n, .we(sd_we), .waddr(sd_waddr), .wdata(sd_wdata), .req(mem_req),
    .addr(mem_addr), .ready(mem_ready), .rvalid(mem_rvalid), .rdata(mem_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // feed the model with the input spikes the neural core accepts
  int pix_idx = 0;
  always @(posedge clk) if (rst_n) begin
    if (start) pix_idx = 0;
    else if (dut.sp_valid && dut.sp_ready) begin
      if (dut.sp_spike) ref_event(1, pix_idx);
      pix_idx = (pix_idx + 1) % int'(TOPO[0]);
    end
    // mechanism counters
    if (dut.u_core.state == 1'b1 && dut.u_core.fifo_full && dut.u_core.mux_spike) n_core_stall++;
    if (dut.g_npu[0].u_npu.state == 2'd2 && dut.g_npu[0].u_npu.fifo_full) n_npu_holdoff++;
    if (dut.g_npu[1].u_npu.state == 2'd2 && dut.g_npu[1].u_npu.fifo_full) n_npu_holdoff++;
    if ((int'(dut.req_valid[0]) + int'(dut.req_valid[1]) + int'(dut.req_valid[2])) > 1) n_collide++;
    if (mem_req && !mem_ready) n_mem_stall++;
  end

  task automatic load_weights(int seed);
    int a;
    m_seed = seed;
    for (int n = 0; n < TOPO[1]; n++)
      for (int p = 0; p < TOPO[0]; p++) begin
        @(negedge clk);
        core_w_we = 1; core_w_neuron = 4'(n); core_w_addr = 5'(p);
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
      pix_we = 1; pix_addr = 5'(p);
      pix_data = ((p * 7 + seed) % 5 == 0) ? 8'd0 : 8'((p * 53 + seed * 91) % 256);
    end
    @(negedge clk); pix_we = 0;
  endtask

  task automatic classify(coding_e c, select_e s, int thr1, int steps, string what);
    int t0;
    coding = c; sel = s; max_steps = 16'(steps);
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
    if (decided && s == SEL_TERMINATE_DELTA) n_td++;
    if (decided && s == SEL_MAX_TERMINATE) n_mt++;
    if (!decided) n_limit++;
    if (m_layer_events[0] > 0) n_code[int'(c)]++;
    $display("%s: class %0d decided %0b after %0d steps, %0d cycles; events per layer %0d %0d %0d %0d %0d",
             what, class_idx, decided, t_step + 1, ($time - t0) / 10,
             m_layer_events[0], m_layer_events[1], m_layer_events[2], m_layer_events[3], m_layer_events[4]);
  endtask

  initial begin
    threshold[0] = 150; threshold[1] = 150; threshold[2] = 120; threshold[3] = 100;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 2; w++) begin
      load_weights(w + 1);
      for (int img = 0; img < 3; img++) begin
        load_image(img + 10 * w);
        classify(CODE_JITTERED_PERIODIC, SEL_TERMINATE_DELTA, 150, 60, "JP/TD");
        classify(CODE_JITTERED_PERIODIC, SEL_MAX_TERMINATE, 150, 60, "JP/Max");
        classify(CODE_JITTERED_PERIODIC, SEL_TERMINATE_DELTA, 450, 60, "SpikeSelect/TD");
        n_ss++;
        classify(CODE_SINGLE_BURST, SEL_MAX_TERMINATE, 150, 16, "SB/Max");
        classify(CODE_FIRST_SPIKE, SEL_MAX_TERMINATE, 150, 30, "FS/Max");
        classify(CODE_JITTERED_PERIODIC, SEL_TERMINATE_DELTA, 150, 2, "JP/limit");
      end
    end
    $display("mechanisms: core stall %0d, NPU hold-off %0d, simultaneous requests %0d, SDRAM stalls %0d, TD stops %0d, Max stops %0d, step limit %0d, JP %0d SB %0d FS %0d, Spike Select %0d",
             n_core_stall, n_npu_holdoff, n_collide, n_mem_stall, n_td, n_mt, n_limit,
             n_code[0], n_code[1], n_code[2], n_ss);
    checks++; if (n_core_stall == 0) begin failures++; $display("core stall never happened"); end
    checks++; if (n_npu_holdoff == 0) begin failures++; $display("NPU hold-off never happened"); end
    checks++; if (n_collide == 0) begin failures++; $display("simultaneous requests never happened"); end
    checks++; if (n_mem_stall == 0) begin failures++; $display("SDRAM stall never happened"); end
    checks++; if (n_td == 0) begin failures++; $display("Terminate Delta never stopped"); end
    checks++; if (n_mt == 0) begin failures++; $display("Max Terminate never stopped"); end
    checks++; if (n_limit == 0) begin failures++; $display("step limit never reached"); end
    for (int c = 0; c < 3; c++) begin
      checks++; if (n_code[c] == 0) begin failures++; $display("code %0d produced no input spike", c); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
