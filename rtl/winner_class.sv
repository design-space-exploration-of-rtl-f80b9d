// winner_class: winner class selection (TD/Max) fed by output-layer events.
//
// Output-layer spikes arrive as events (the index of the output neuron) from
// the last layer's FIFO; this block pops one per clock while the FIFO is not
// empty and counts them per class, giving the activation vector. The
// Terminate Delta and Max Terminate rules both watch that vector and `sel`
// picks which one ends the classification. When the chosen rule fires,
// `stop` goes high and stays high until `clear` (start of the next image),
// `class_idx` is frozen, and later events are still drained but no longer
// counted. Until then `class_idx` follows the current leader. Counters
// saturate at 2^CW-1. The rules follow the paper; the event interface,
// counter width, saturation and freezing are this implementation's.
//
// Timing: an event popped at edge t is counted at t; `stop` can rise at t+1.
module winner_class
  import snn_pkg::*;
#(
  parameter int unsigned N  = 10,
  parameter int unsigned CW = 8,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  // event input (read side of a first-word-fall-through FIFO)
  input  logic          ev_empty,
  input  logic [IW-1:0] ev_addr,
  output logic          ev_rd,
  // configuration
  input  select_e       sel,
  input  logic [CW-1:0] delta,
  input  logic [CW-1:0] max_value,
  // result
  output logic          stop,
  output logic [IW-1:0] class_idx,
  output logic [CW-1:0] act [N]
);
  logic [CW-1:0] td_max1, td_max2, mt_max;
  logic [IW-1:0] td_class, mt_class, class_q;
  logic          td_stop, mt_stop, rule_stop;

  terminate_delta #(.N(N), .CW(CW)) u_td (
    .act(act), .delta(delta), .max1(td_max1), .max2(td_max2),
    .class_idx(td_class), .stop(td_stop)
  );

  max_terminate #(.N(N), .CW(CW)) u_mt (
    .act(act), .max_value(max_value), .max_act(mt_max),
    .class_idx(mt_class), .stop(mt_stop)
  );

  assign rule_stop = (sel == SEL_TERMINATE_DELTA) ? td_stop : mt_stop;
  assign ev_rd     = !ev_empty;
  assign class_idx = stop ? class_q
                   : ((sel == SEL_TERMINATE_DELTA) ? td_class : mt_class);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int unsigned i = 0; i < N; i++) act[i] <= '0;
      stop    <= 1'b0;
      class_q <= '0;
    end else if (clear) begin
      for (int unsigned i = 0; i < N; i++) act[i] <= '0;
      stop    <= 1'b0;
      class_q <= '0;
    end else begin
      if (!stop && rule_stop) begin
        stop    <= 1'b1;
        class_q <= (sel == SEL_TERMINATE_DELTA) ? td_class : mt_class;
      end
      if (!stop && !rule_stop && ev_rd && (32'(ev_addr) < N)
          && act[ev_addr] != '1)
        act[ev_addr] <= act[ev_addr] + CW'(1);
    end
  end
endmodule
