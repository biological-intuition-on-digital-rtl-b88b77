// snn_pkg: constants and types shared by the spiking-neural-network core.
//
// The default sizes describe one fully connected layer that classifies a
// 28x28 grey-scale digit image: 784 inputs, 10 output LIF neurons (one per
// digit class), 8-bit pixel intensities, 9-bit signed synaptic weights and a
// firing threshold of 128. The membrane word width (16 bits), the decay
// shift (beta = 2^-3) and the PRNG seed are this design's own choices.
//
// neuron_op_e is the command a neuron receives each cycle from the layer
// controller (or, for OP_INT, from the encoder's spike_valid strobe).
package snn_pkg;

  localparam int unsigned N_INPUTS    = 784;  // 28 x 28 pixels
  localparam int unsigned N_NEURONS   = 10;   // one neuron per digit class
  localparam int unsigned PIXEL_W     = 8;    // intensity 0..255
  localparam int unsigned WEIGHT_W    = 9;    // signed fixed-point weight
  localparam int unsigned V_W         = 16;   // membrane potential width
  localparam int signed   V_TH        = 128;  // firing threshold
  localparam int signed   V_REST      = 0;    // reset / resting potential
  localparam int unsigned DECAY_SHIFT = 3;    // beta = 2^-DECAY_SHIFT
  localparam int unsigned SHIFT_W     = 4;    // width of the decay register
  localparam int unsigned T_STEPS     = 20;   // default inference window
  localparam int unsigned STEP_W      = 8;    // width of timestep counters
  localparam logic [31:0] PRNG_SEED   = 32'h2545_F491;

  typedef enum logic [2:0] {
    OP_NOP   = 3'd0,  // hold the membrane potential
    OP_CLEAR = 3'd1,  // start of inference: potential to V_REST
    OP_LEAK  = 3'd2,  // V <= V - (V >>> n)
    OP_INT   = 3'd3,  // V <= V + (spike ? W : 0)
    OP_FIRE  = 3'd4   // compare V with the threshold, fire and reset
  } neuron_op_e;

endpackage
