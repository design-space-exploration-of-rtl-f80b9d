// if_neuron: one integrate-and-fire neuron with its own potential register.
//
// On every clock edge where `enable` is high the neuron performs one step of
// if_core: potential <= potential + (spike ? weight : 0); if the result is
// greater than `threshold` the output spike register is set and the threshold
// is subtracted, else the output spike register is cleared. The datapath
// (input mux with '0', adder, ">Th" comparator, "-Th" subtractor, output mux,
// Vin register and output spike register) follows the paper's IF neuron
// figure. The `enable` input, the synchronous `clear` of the potential at the
// start of an image and the active-low reset are choices of this
// implementation: the counters that drive the neurons decide when a step
// happens, and `out_spike` then holds its value until the next enabled step,
// so a downstream scanner can read it.
//
// Timing: out_spike and potential change one clock after the enabled step.
module if_neuron
  import snn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    clear,      // zero the potential and the output spike
  input  logic    enable,     // perform one integrate step this cycle
  input  logic    spike,
  input  weight_t weight,
  input  pot_t    threshold,
  output logic    out_spike,
  output pot_t    potential
);
  pot_t v_next;
  logic fire;

  if_core u_core (
    .spike    (spike),
    .weight   (weight),
    .v_in     (potential),
    .threshold(threshold),
    .v_next   (v_next),
    .fire     (fire)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      potential <= '0;
      out_spike <= 1'b0;
    end else if (clear) begin
      potential <= '0;
      out_spike <= 1'b0;
    end else if (enable) begin
      potential <= v_next;
      out_spike <= fire;
    end
  end
endmodule
