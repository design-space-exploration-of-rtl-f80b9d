// snn_hybrid: Hybrid Architecture for a fully connected spiking classifier.
//
// The network TOPOLOGY = {inputs, hidden 1, ..., outputs} is mapped as
// follows. The spike generator turns the image into input spikes, one time
// step at a time, and streams them pixel by pixel. The neural core holds
// the input layer and the first hidden layer fully in parallel (one IF
// neuron per logical neuron, weights in registers) because that layer sees
// by far the most spikes. Every deeper layer is one NPU that computes its
// logical neurons one after the other; the NPUs are chained through their
// event FIFOs. Their weights live in an external SDRAM that the network
// controller shares between them (request queue + demux). The output
// layer's events feed the winner class selection, which counts spikes per
// class and stops the processing with Terminate Delta or Max Terminate.
//
// Synchronisation: within a time step, events flow through all layers as
// soon as they are produced. The generator starts the next time step only
// when the whole network has drained (neural core waiting for input, every
// FIFO empty, every NPU idle, memory idle). This keeps the order of output
// spikes equal to a layer-by-layer evaluation of each time step, which the
// Terminate Delta decision depends on. This barrier is the implementation's
// way of realising the layer synchronisation that the paper attributes to
// the counters and the linked NPU controllers.
//
// Operation: load pixels (pix_*), first-layer weights (core_w_*) and the
// SDRAM contents (layer k+1 weights at BASE[k] + event*N_next + neuron),
// set the configuration inputs, pulse `start`. `start` also clears all
// potentials and class counters. `done` rises when a decision was taken
// (`decided`) or `max_steps` time steps ran out, and the network is idle;
// `class_idx` is then the winner class.
//
// The SDRAM is outside this module; its read port is brought out (mem_*).
module snn_hybrid
  import snn_pkg::*;
#(
  parameter int unsigned N_LAYERS = 5,
  parameter int unsigned TOPOLOGY [N_LAYERS] = '{784, 300, 300, 300, 10},
  parameter int unsigned CORE_FIFO_DEPTH = 512,
  parameter int unsigned NPU_FIFO_DEPTH  = 512,
  parameter int unsigned ADDR_W = 24,
  parameter int unsigned CW     = 8,
  parameter int unsigned T_W    = 16,
  localparam int unsigned N_NPU = N_LAYERS - 2,
  localparam int unsigned N_IN  = TOPOLOGY[0],
  localparam int unsigned N_H1  = TOPOLOGY[1],
  localparam int unsigned N_OUT = TOPOLOGY[N_LAYERS-1],
  localparam int unsigned IAW   = (N_IN > 1)  ? $clog2(N_IN)  : 1,
  localparam int unsigned HAW   = (N_H1 > 1)  ? $clog2(N_H1)  : 1,
  localparam int unsigned OAW   = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  // image load
  input  logic              pix_we,
  input  logic [IAW-1:0]    pix_addr,
  input  logic [7:0]        pix_data,
  // first hidden layer weight load (neural core registers)
  input  logic              core_w_we,
  input  logic [HAW-1:0]    core_w_neuron,
  input  logic [IAW-1:0]    core_w_addr,
  input  weight_t           core_w_data,
  // configuration
  input  coding_e           coding,
  input  logic [15:0]       f_min,
  input  logic [15:0]       f_max,
  input  logic [T_W-1:0]    t_min,
  input  logic [T_W-1:0]    window,
  input  logic [T_W-1:0]    max_steps,
  input  pot_t              threshold [N_LAYERS-1],
  input  select_e           sel,
  input  logic [CW-1:0]     delta,
  input  logic [CW-1:0]     max_value,
  // control and result
  input  logic              start,
  output logic              done,
  output logic              decided,
  output logic [OAW-1:0]    class_idx,
  output logic [CW-1:0]     activations [N_OUT],
  output logic [T_W-1:0]    t_step,
  // external weight SDRAM read port
  output logic              mem_req,
  output logic [ADDR_W-1:0] mem_addr,
  input  logic              mem_ready,
  input  logic              mem_rvalid,
  input  weight_t           mem_rdata
);
  // widest layer, for the event buses between layers
  function automatic int unsigned max_layer();
    int unsigned m = 1;
    for (int i = 0; i < N_LAYERS; i++) if (TOPOLOGY[i] > m) m = TOPOLOGY[i];
    return m;
  endfunction
  // largest weight block of one NPU, for its local address
  function automatic int unsigned max_block();
    int unsigned m = 2;
    for (int i = 1; i + 1 < N_LAYERS; i++)
      if (TOPOLOGY[i] * TOPOLOGY[i+1] > m) m = TOPOLOGY[i] * TOPOLOGY[i+1];
    return m;
  endfunction
  // start address of NPU k's weights in the SDRAM: blocks packed in order
  typedef int unsigned base_t [N_NPU];
  function automatic base_t npu_base();
    base_t b;
    int unsigned acc = 0;
    for (int k = 0; k < N_NPU; k++) begin
      b[k] = acc;
      acc += TOPOLOGY[k+1] * TOPOLOGY[k+2];
    end
    return b;
  endfunction

  localparam int unsigned EW  = $clog2(max_layer());
  localparam int unsigned LAW = $clog2(max_block());
  localparam base_t BASE = npu_base();

  // event buses: index 0 = first hidden layer (neural core), k+1 = NPU k
  logic [EW-1:0]  ev_addr  [N_NPU+1];
  logic           ev_empty [N_NPU+1];
  logic           ev_rd    [N_NPU+1];
  logic           npu_idle [N_NPU];
  logic           req_valid [N_NPU];
  logic [LAW-1:0] req_addr  [N_NPU];
  logic           req_ready [N_NPU];
  logic           w_valid   [N_NPU];
  weight_t        w_data;

  logic sp_valid, sp_spike, sp_ready, gen_busy, gen_done;
  logic core_idle, core_step_end_unused, nc_idle, drained, step_go;
  logic [HAW-1:0] core_ev_addr;

  spike_generator #(.N_IN(N_IN), .PIX_W(8), .T_W(T_W)) u_gen (
    .clk(clk), .rst_n(rst_n),
    .pix_we(pix_we), .pix_addr(pix_addr), .pix_data(pix_data),
    .start(start), .stop(decided), .step_go(step_go), .coding(coding),
    .f_min(f_min), .f_max(f_max), .t_min(t_min), .window(window),
    .max_steps(max_steps),
    .sp_valid(sp_valid), .sp_spike(sp_spike), .sp_ready(sp_ready),
    .busy(gen_busy), .done(gen_done), .t_step(t_step)
  );

  neural_core #(.N_IN(N_IN), .N_HID(N_H1), .FIFO_DEPTH(CORE_FIFO_DEPTH)) u_core (
    .clk(clk), .rst_n(rst_n), .clear(start), .threshold(threshold[0]),
    .w_we(core_w_we), .w_neuron(core_w_neuron), .w_addr(core_w_addr),
    .w_data(core_w_data),
    .sp_valid(sp_valid), .sp_spike(sp_spike), .sp_ready(sp_ready),
    .ev_rd(ev_rd[0]), .ev_addr(core_ev_addr), .ev_empty(ev_empty[0]),
    .step_end(core_step_end_unused), .idle(core_idle)
  );
  assign ev_addr[0] = EW'(core_ev_addr);

  for (genvar k = 0; k < N_NPU; k++) begin : g_npu
    localparam int unsigned N_PRE = TOPOLOGY[k+1];
    localparam int unsigned N_NEU = TOPOLOGY[k+2];
    localparam int unsigned PAW   = (N_PRE > 1) ? $clog2(N_PRE) : 1;
    localparam int unsigned NAW   = (N_NEU > 1) ? $clog2(N_NEU) : 1;
    localparam int unsigned MAW   = $clog2(N_PRE * N_NEU);
    logic [NAW-1:0] out_addr;
    logic [MAW-1:0] local_addr;

    npu #(.N_PRE(N_PRE), .N_NEU(N_NEU), .FIFO_DEPTH(NPU_FIFO_DEPTH)) u_npu (
      .clk(clk), .rst_n(rst_n), .clear(start), .threshold(threshold[k+1]),
      .in_empty(ev_empty[k]), .in_addr(ev_addr[k][PAW-1:0]), .in_rd(ev_rd[k]),
      .req_valid(req_valid[k]), .req_addr(local_addr), .req_ready(req_ready[k]),
      .w_valid(w_valid[k]), .w_data(w_data),
      .out_rd(ev_rd[k+1]), .out_addr(out_addr), .out_empty(ev_empty[k+1]),
      .idle(npu_idle[k])
    );
    assign ev_addr[k+1]  = EW'(out_addr);
    assign req_addr[k]   = LAW'(local_addr);
  end

  network_controller #(
    .N_NPU(N_NPU), .LAW(LAW), .ADDR_W(ADDR_W), .QUEUE_DEPTH(N_NPU + 1),
    .BASE(BASE)
  ) u_netctrl (
    .clk(clk), .rst_n(rst_n),
    .req_valid(req_valid), .req_addr(req_addr), .req_ready(req_ready),
    .w_valid(w_valid), .w_data(w_data),
    .mem_req(mem_req), .mem_addr(mem_addr), .mem_ready(mem_ready),
    .mem_rvalid(mem_rvalid), .mem_rdata(mem_rdata), .idle(nc_idle)
  );

  winner_class #(.N(N_OUT), .CW(CW)) u_winner (
    .clk(clk), .rst_n(rst_n), .clear(start),
    .ev_empty(ev_empty[N_NPU]), .ev_addr(ev_addr[N_NPU][OAW-1:0]),
    .ev_rd(ev_rd[N_NPU]),
    .sel(sel), .delta(delta), .max_value(max_value),
    .stop(decided), .class_idx(class_idx), .act(activations)
  );

  always_comb begin
    drained = core_idle && nc_idle;
    for (int k = 0; k <= N_NPU; k++) drained &= ev_empty[k];
    for (int k = 0; k < N_NPU; k++)  drained &= npu_idle[k];
  end
  assign step_go = drained;
  assign done    = gen_done && drained && !start;
endmodule
