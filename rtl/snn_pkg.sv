// snn_pkg: shared constants and types of the differential-time SNN accelerator.
//
// Spikes travel between blocks as tokens {last, delta, idx}: delta is the
// time since the previous spike of the same stream, idx the synapse that
// produced it, and last marks the end of one inference (no spike).
// The neuron cores are steered by one operation code per cycle that the
// layer controller broadcasts; it stands for the 'select' and 'fire'
// control lines of the neuron core.
// Widths and fixed-point formats are this design's own choices.
package snn_pkg;

  // Delta-time width of every spike stream.
  localparam int unsigned DT_W      = 8;
  // Weights: signed, W_FRAC fraction bits.
  localparam int unsigned W_W       = 4;
  localparam int unsigned W_FRAC    = 2;
  // Membrane potential: signed, POT_FRAC fraction bits; theta = 1.0.
  localparam int unsigned POT_W     = 16;
  localparam int unsigned POT_FRAC  = 8;
  // Weights written per cycle through the load port (8 x 4 bit = 32 bit).
  localparam int unsigned WR_LANES  = 8;

  // Operation broadcast to all neuron cores of a layer.
  typedef enum logic [1:0] {
    OP_NOP   = 2'd0,  // hold the potential
    OP_ADD   = 2'd1,  // P <= P + w
    OP_DECAY = 2'd2,  // P <= P >>> 1  (one step of beta = 0.5)
    OP_FIRE  = 2'd3   // spike = (P >= theta); if so P <= P - theta
  } core_op_e;

endpackage
