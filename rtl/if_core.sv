// if_core: the combinational integrate-and-fire step shared by every neuron.
//
// One step takes the stored potential, adds the weight when a spike is
// present (a multiplexer selects the weight or zero), compares the sum with
// the threshold and, when the sum is strictly greater, subtracts the
// threshold and flags a firing; otherwise the sum is kept. This is the
// datapath of the paper's IF-neuron figure (mux, adder, ">Th", "-Th", output
// mux) without its registers, so that the fully parallel neurons and the
// time-multiplexed NPU use the same arithmetic. The addition saturates at
// the limits of the potential width (a choice of this implementation).
module if_core
  import snn_pkg::*;
(
  input  logic    spike,      // an input spike is present
  input  weight_t weight,     // its synaptic weight
  input  pot_t    v_in,       // stored membrane potential
  input  pot_t    threshold,  // firing threshold
  output pot_t    v_next,     // potential to store back
  output logic    fire        // the neuron fires this step
);
  pot_t sum;

  always_comb begin
    sum    = sat_add(v_in, spike ? weight : weight_t'(0));
    fire   = (sum > threshold);
    v_next = fire ? pot_t'(sum - threshold) : sum;
  end
endmodule
