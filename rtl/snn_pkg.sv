// snn_pkg: constants and types shared by the discrete-time spiking neural
// network (SNN) processor.
//
// The processor runs a three-layer perceptron of binary (spiking) neurons.
// Weights are 7-bit signed fixed-point numbers, the precision chosen from
// the weight-precision study behind this design. The membrane-potential
// width, the fixed-point scaling of the firing threshold and the enum
// encodings are this design's own choices.
package snn_pkg;

  // Weight precision (7-bit signed, from the design study).
  localparam int unsigned WEIGHT_W = 7;

  // Membrane potential width (own choice): saturating signed accumulator.
  localparam int unsigned POT_W = 16;

  // Firing threshold theta = 1.0 in the trained model. Weights are read as
  // Q1.6 numbers (6 fraction bits, own choice), so theta = 1.0 is 64 LSBs.
  localparam int signed THETA_DEFAULT = 64;

  // Neuron integration modes.
  //   NEURON_DC: discontinuous integration, potential restarts every time step.
  //   NEURON_CT: continuous integration, potential carried across time steps
  //              and reduced by theta when the neuron fires.
  typedef enum logic {
    NEURON_DC = 1'b0,
    NEURON_CT = 1'b1
  } neuron_mode_e;

  // Per-layer sequencer state inside the pipeline controller.
  typedef enum logic [1:0] {
    LS_IDLE  = 2'd0,   // waiting for 'done' from the layer before and a free output
    LS_INTEG = 2'd1,   // popping active spike indices, integrating weights
    LS_FIRE  = 2'd2    // firing check, firing vector written
  } layer_state_e;

  // Time-step tag carried with every firing vector down the pipeline.
  typedef struct packed {
    logic first;   // first time step of an input sample
    logic last;    // last time step of an input sample
  } step_tag_t;

  // Saturating signed add of a weight (or bias) to a membrane potential.
  function automatic logic signed [POT_W-1:0] sat_add(
      input logic signed [POT_W-1:0]    a,
      input logic signed [WEIGHT_W-1:0] w);
    logic signed [POT_W:0] s;
    s = {a[POT_W-1], a} + {{(POT_W+1-WEIGHT_W){w[WEIGHT_W-1]}}, w};
    if (s[POT_W] != s[POT_W-1])  // overflow: clamp to the extreme of the sign
      return s[POT_W] ? {1'b1, {(POT_W-1){1'b0}}} : {1'b0, {(POT_W-1){1'b1}}};
    return s[POT_W-1:0];
  endfunction

endpackage
