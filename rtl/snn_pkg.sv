// snn_pkg: types and constants shared by the spiking-network layer RTL.
//
// Spikes travel between layers as sign-magnitude words {sign, dt}: dt is the
// number of time steps since the previous spike on the same wire, and the sign
// is the spike's polarity. A word whose dt is zero adds one more unit of
// amplitude to the spike before it (so +5,+0 is a spike of height 2 at the same
// time). The all-ones word (sign = 1 and every dt bit 1) is reserved as a timer
// overflow spike: it carries no amplitude and only says that 2**DT_W-1 time
// steps passed. That reservation follows the paper; the field widths are this
// design's choice and are set per module by parameters.
package snn_pkg;

  // Default widths (all this design's choice except where noted).
  localparam int unsigned DEF_DT_W       = 8;  // dt magnitude bits
  localparam int unsigned DEF_W_W        = 6;  // weight bits (paper: 6-bit fixed point)
  localparam int unsigned DEF_W_FRAC     = 4;  // weight fraction bits: threshold 1.0 = 16
  localparam int unsigned DEF_DECAY_SHIFT = 1; // beta = 2**-1 = 0.5 (paper)

  // One rotation step of the common stage, broadcast to all neuron cores of a
  // layer. new_min: this synapse's head is earlier than every head seen so far
  // in this rotation (accumulator restarts); eq: it ties with the running
  // minimum (accumulator adds). spike=0 marks an overflow head (no weight).
  typedef struct packed {
    logic valid;
    logic new_min;
    logic eq;
    logic spike;
    logic sign;
  } rot_step_t;

  // Controller state of a layer.
  typedef enum logic [2:0] {
    L_LOAD  = 3'd0,  // integrate new buffer heads into the time ring
    L_ROT   = 3'd1,  // rotate the ring once, tracking the minimum
    L_DRAIN = 3'd2,  // let the neuron accumulators take the last step
    L_UPD   = 3'd3   // hand the event time to the neuron cores
  } layer_state_t;

  // Neuron output state.
  typedef enum logic [0:0] {
    N_IDLE = 1'b0,
    N_EMIT = 1'b1
  } neuron_state_t;

endpackage
