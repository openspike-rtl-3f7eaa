// snn_pkg: types and constants shared by the OpenSpike accelerator core.
//
// The core runs a three-layer dense spiking network (N input neurons with one
// synapse each, N hidden neurons with N synapses each, N_OUT output neurons with
// N synapses each) on N time-multiplexed hardware neurons. Potentials are 8-bit
// two's complement (the width printed in the spike-emission figure), weights are
// one bit (1 = +1, 0 = -1), decay rates are 4-bit codes counted in eighths.
// Widths of the counters and codes are this design's own choices.
package snn_pkg;

  localparam int unsigned POT_W    = 8;   // membrane potential width
  localparam int unsigned DECAY_W  = 4;   // decay-rate code width (beta = code/8)
  localparam int unsigned HOST_W   = 32;  // host data word
  localparam int unsigned HADDR_W  = 16;  // host word address within one bank

  // Layer currently handled by a pipeline (MAC path or neuron-selector path).
  typedef enum logic [1:0] {
    LAYER_IN  = 2'd0,
    LAYER_HID = 2'd1,
    LAYER_OUT = 2'd2
  } layer_e;

  // Main states of the control unit.
  typedef enum logic [2:0] {
    ST_IDLE    = 3'd0,
    ST_PRELOAD = 3'd1,   // first fill of the input spike cache
    ST_IN      = 3'd2,   // input layer state (3 cycles)
    ST_HID     = 3'd3,   // hidden layer state
    ST_OUT     = 3'd4,   // output layer state
    ST_FLUSH   = 3'd5    // saves the output layer of the last time step
  } state_e;

  // SRAM banks reachable from the host port.
  typedef enum logic [2:0] {
    MEM_WGT_HID = 3'd0,  // hidden-layer weights
    MEM_WGT_OUT = 3'd1,  // output-layer weights
    MEM_WGT_IN  = 3'd2,  // input-layer weights (one per input neuron)
    MEM_INPUT   = 3'd3,  // input data (spikes), one 1024-bit frame per time step
    MEM_POT     = 3'd4,  // membrane potentials
    MEM_DECAY   = 3'd5,  // decay-rate codes
    MEM_SPIKE   = 3'd6,  // spikes, two time-step parities
    MEM_INH     = 3'd7   // spike-inhibition bits
  } mem_e;

  // Saturate a wide signed value to the potential width.
  function automatic logic signed [POT_W-1:0] sat_pot(input logic signed [15:0] v);
    if (v > 16'sd127)       return 8'sd127;
    else if (v < -16'sd128) return -8'sd128;
    else                    return v[POT_W-1:0];
  endfunction

endpackage
