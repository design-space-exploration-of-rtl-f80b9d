// snn_pkg: types and constants shared by the spiking-network blocks.
//
// Weights are signed 8-bit numbers, the coding precision the design is built
// around. Membrane potentials are signed and wider (16 bits here, a choice of
// this implementation) and saturate instead of wrapping. The package also
// holds the input-coding selector of the spike generator and the selector of
// the winner-class rule.
package snn_pkg;

  // Width of one synaptic weight (signed).
  localparam int unsigned W_BITS   = 8;
  // Width of a membrane potential and of a firing threshold (signed).
  localparam int unsigned POT_BITS = 16;

  typedef logic signed [W_BITS-1:0]   weight_t;
  typedef logic signed [POT_BITS-1:0] pot_t;

  // Input coding used by the spike generator. Spike Select is not a separate
  // code: it is Jittered Periodic input with a raised first-layer threshold.
  typedef enum logic [1:0] {
    CODE_JITTERED_PERIODIC = 2'd0,
    CODE_SINGLE_BURST      = 2'd1,
    CODE_FIRST_SPIKE       = 2'd2
  } coding_e;

  // Rule that ends a classification.
  typedef enum logic {
    SEL_TERMINATE_DELTA = 1'b0,
    SEL_MAX_TERMINATE   = 1'b1
  } select_e;

  // Saturating signed addition of a weight to a potential.
  function automatic pot_t sat_add(pot_t a, weight_t w);
    logic signed [POT_BITS:0] s;
    s = {a[POT_BITS-1], a} + (POT_BITS+1)'(w);
    if (s > (POT_BITS+1)'(signed'({1'b0, {(POT_BITS-1){1'b1}}})))
      return {1'b0, {(POT_BITS-1){1'b1}}};
    if (s < (POT_BITS+1)'(signed'({2'b11, {(POT_BITS-1){1'b0}}})))
      return {1'b1, {(POT_BITS-1){1'b0}}};
    return s[POT_BITS-1:0];
  endfunction

endpackage
