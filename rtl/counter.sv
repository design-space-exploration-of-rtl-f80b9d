// counter: modulo-N address counter with an end-of-sweep pulse.
//
// The counters of the network step through synapse addresses (which input
// spike is being integrated) and logical-neuron addresses (which neuron is
// scanned or computed). While `enable` is high the count advances by one per
// clock; after MODULO-1 it wraps to 0 and `last` is high in the cycle that
// holds MODULO-1, so `enable && last` marks the end of a sweep, the "End"
// signal that chains counters from one layer to the next. `clear` returns
// the count to 0. The function comes from the paper; the exact interface is
// this implementation's.
module counter #(
  parameter int unsigned MODULO = 784,
  localparam int unsigned W = (MODULO > 1) ? $clog2(MODULO) : 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic         enable,
  output logic [W-1:0] count,
  output logic         last
);
  assign last = (count == W'(MODULO - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      count <= '0;
    else if (clear)  count <= '0;
    else if (enable) count <= last ? '0 : count + W'(1);
  end
endmodule
