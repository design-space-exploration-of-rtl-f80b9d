// neural_core: the input layer and the first hidden layer, fully parallel.
//
// There is one if_neuron per logical neuron of the first hidden layer
// (N_HID of them), each with its own N_IN weights held in registers. The
// input neuron stream (one pixel per handshake, sp_spike = the pixel spikes
// in this time step) is accepted in pixel order; the hidden counter follows
// that order and gives the address of the current input, which selects each
// neuron's weight. When the accepted pixel spikes, all neurons integrate
// its weight in the same clock. Then the 1:N counter scans the neurons'
// output spikes through a multiplexer, one neuron per clock, and writes the
// address of every neuron that fired into the output FIFO, so the FIFO
// holds the layer's events in ascending neuron order. Only after the scan
// is the next pixel accepted (the red link in the paper's Neural Core
// figure: the 1:N counter's end enables the hidden counter). A pixel
// without a spike costs one clock. When the hidden counter has passed all
// N_IN pixels, `step_end` pulses (the counter's end / "next" output).
//
// Follows the paper: parallel IF neurons, register weights, hidden counter,
// 1:N counter, MUX and FIFO. This implementation's choices: the weight load
// port, the handshake, the stall of the scan while the FIFO is full, and
// `clear`, which zeroes all potentials at the start of an image.
//
// Timing: a spiking pixel takes 1 + N_HID clocks (integrate, then scan);
// a silent pixel takes 1 clock.
module neural_core
  import snn_pkg::*;
#(
  parameter int unsigned N_IN       = 784,
  parameter int unsigned N_HID      = 300,
  parameter int unsigned FIFO_DEPTH = 512,
  localparam int unsigned IAW = (N_IN > 1)  ? $clog2(N_IN)  : 1,
  localparam int unsigned HAW = (N_HID > 1) ? $clog2(N_HID) : 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           clear,
  input  pot_t           threshold,
  // weight load: weight of input w_addr for hidden neuron w_neuron
  input  logic           w_we,
  input  logic [HAW-1:0] w_neuron,
  input  logic [IAW-1:0] w_addr,
  input  weight_t        w_data,
  // input neuron stream
  input  logic           sp_valid,
  input  logic           sp_spike,
  output logic           sp_ready,
  // first hidden layer events (FIFO read side)
  input  logic           ev_rd,
  output logic [HAW-1:0] ev_addr,
  output logic           ev_empty,
  // status
  output logic           step_end,
  output logic           idle
);
  typedef enum logic {S_IN, S_SCAN} state_e;
  state_e state;

  weight_t        w [N_HID][N_IN];
  logic [IAW-1:0] in_addr;
  logic           in_last;
  logic [HAW-1:0] scan_addr;
  logic           scan_last;
  logic           out_spike [N_HID];
  pot_t           potential [N_HID];
  logic           accept, integrate, scan_adv, mux_spike, fifo_full, was_last;
  logic [$clog2(FIFO_DEPTH):0] fifo_level_unused;

  assign sp_ready  = (state == S_IN);
  assign idle      = (state == S_IN);
  assign accept    = sp_valid && sp_ready;
  assign integrate = accept && sp_spike;
  assign mux_spike = out_spike[scan_addr];
  assign scan_adv  = (state == S_SCAN) && !(mux_spike && fifo_full);
  assign step_end  = (accept && !sp_spike && in_last)
                  || (scan_adv && scan_last && was_last);

  always_ff @(posedge clk) begin
    if (w_we) w[w_neuron][w_addr] <= w_data;
  end

  // hidden counter: address of the input spike being integrated
  counter #(.MODULO(N_IN)) u_hidden_cnt (
    .clk(clk), .rst_n(rst_n), .clear(clear), .enable(accept),
    .count(in_addr), .last(in_last)
  );

  // 1:N counter: drives the MUX and gives the address stored in the FIFO
  counter #(.MODULO(N_HID)) u_scan_cnt (
    .clk(clk), .rst_n(rst_n), .clear(clear), .enable(scan_adv),
    .count(scan_addr), .last(scan_last)
  );

  for (genvar n = 0; n < N_HID; n++) begin : g_neuron
    if_neuron u_neuron (
      .clk(clk), .rst_n(rst_n), .clear(clear),
      .enable(integrate), .spike(1'b1), .weight(w[n][in_addr]),
      .threshold(threshold), .out_spike(out_spike[n]),
      .potential(potential[n])
    );
  end

  fifo #(.WIDTH(HAW), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk), .rst_n(rst_n),
    .wr_en(scan_adv && mux_spike), .in_data(scan_addr),
    .rd_en(ev_rd), .out_data(ev_addr), .empty(ev_empty), .full(fifo_full),
    .level(fifo_level_unused)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IN;
      was_last <= 1'b0;
    end else if (clear) begin
      state    <= S_IN;
      was_last <= 1'b0;
    end else begin
      unique case (state)
        S_IN: if (integrate) begin
          state    <= S_SCAN;
          was_last <= in_last;
        end
        S_SCAN: if (scan_adv && scan_last) state <= S_IN;
        default: state <= S_IN;
      endcase
    end
  end
endmodule
