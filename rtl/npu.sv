// npu: Neural Processing Unit, one time-multiplexed layer.
//
// A single hardware IF neuron (if_core) computes, one after the other, all
// N_NEU logical neurons of a layer whose input layer has N_PRE neurons. The
// membrane potentials of the logical neurons are kept in a small register
// memory inside the NPU. Events (addresses of input-layer neurons that
// fired) are taken from the upstream FIFO. For each event the NPU
// controller walks the counter over logical neurons j = 0 .. N_NEU-1: it
// requests weight (event, j) from the weight memory, waits for it, lets the
// hardware neuron integrate it into potential j and, if that neuron fires,
// writes j into the NPU's output FIFO. Weights of the layer are laid out
// event-major: local address = event * N_NEU + j, so one event reads a
// contiguous block. Requests go to the network controller (SDRAM) and are
// answered on (w_valid, w_data); one request is outstanding at a time. A
// request is only issued while the output FIFO has room, so a firing
// always finds space.
//
// Follows the paper: NPU controller, counter, hardware neuron, weights
// memory access and output FIFO. This implementation's choices: the
// request/response handshake, the potential memory with its N_NEU-clock
// clear sweep after reset and after `clear`, and strictly sequential
// (unpipelined) requests.
//
// Timing: per event, N_NEU requests, each taking one clock to issue plus
// the memory latency; the clear sweep takes N_NEU clocks.
module npu
  import snn_pkg::*;
#(
  parameter int unsigned N_PRE      = 300,
  parameter int unsigned N_NEU      = 300,
  parameter int unsigned FIFO_DEPTH = 512,
  localparam int unsigned PAW = (N_PRE > 1) ? $clog2(N_PRE) : 1,
  localparam int unsigned NAW = (N_NEU > 1) ? $clog2(N_NEU) : 1,
  localparam int unsigned MAW = $clog2(N_PRE * N_NEU)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  pot_t           threshold,
  // input events (read side of the previous layer's FIFO)
  input  logic           in_empty,
  input  logic [PAW-1:0] in_addr,
  output logic           in_rd,
  // weight request to the network controller
  output logic           req_valid,
  output logic [MAW-1:0] req_addr,
  input  logic           req_ready,
  // weight answer from the network controller
  input  logic           w_valid,
  input  weight_t        w_data,
  // output events (FIFO read side)
  input  logic           out_rd,
  output logic [NAW-1:0] out_addr,
  output logic           out_empty,
  // status
  output logic           idle
);
  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_REQ, S_WAIT} state_e;
  state_e state;

  pot_t           pot [N_NEU];
  logic [PAW-1:0] ev;
  logic [NAW-1:0] j;
  logic           j_last, j_adv, fifo_full, fire, got;
  pot_t           v_next;
  logic [$clog2(FIFO_DEPTH):0] fifo_level_unused;

  assign got       = (state == S_WAIT) && w_valid;
  assign j_adv     = (state == S_CLEAR) || got;
  assign in_rd     = (state == S_IDLE) && !in_empty;
  assign req_valid = (state == S_REQ) && !fifo_full;
  assign req_addr  = MAW'(32'(ev) * N_NEU + 32'(j));
  assign idle      = (state == S_IDLE);

  counter #(.MODULO(N_NEU)) u_cnt (
    .clk(clk), .rst_n(rst_n), .clear(clear), .enable(j_adv),
    .count(j), .last(j_last)
  );

  // the hardware neuron
  if_core u_neuron (
    .spike(1'b1), .weight(w_data), .v_in(pot[j]), .threshold(threshold),
    .v_next(v_next), .fire(fire)
  );

  fifo #(.WIDTH(NAW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n),
    .wr_en(got && fire), .in_data(j),
    .rd_en(out_rd), .out_data(out_addr), .empty(out_empty), .full(fifo_full),
    .level(fifo_level_unused)
  );

  always_ff @(posedge clk) begin
    if (state == S_CLEAR) pot[j] <= '0;
    else if (got)         pot[j] <= v_next;
  end

  // NPU controller
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_CLEAR;
      ev    <= '0;
    end else if (clear) begin
      state <= S_CLEAR;
    end else begin
      unique case (state)
        S_CLEAR: if (j_last) state <= S_IDLE;
        S_IDLE: if (!in_empty) begin
          ev    <= in_addr;
          state <= S_REQ;
        end
        S_REQ:  if (req_valid && req_ready) state <= S_WAIT;
        S_WAIT: if (w_valid) state <= j_last ? S_IDLE : S_REQ;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_outstanding: assert property (@(posedge clk) disable iff (!rst_n)
    w_valid |-> state == S_WAIT);
endmodule
