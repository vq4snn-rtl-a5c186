// vq4snn_pkg: types, default sizes and small arithmetic helpers shared by the
// VQ4SNN accelerator modules.
//
// The default sizes are those of the main configuration the design is built
// for: a 784-128-10 fully connected network with intra-layer inhibitory
// (recurrent) synapses, 5-bit weights, 11-bit membrane potentials, a hidden
// layer compressed with vectors of d = 8 weights and a codebook of k = 2048
// entries read through two ports, and 25 time steps per input.  The leak shift
// is this design's own choice: the decay is a power of two, but its value is
// not given.
package vq4snn_pkg;

  // Network of the main configuration.
  localparam int unsigned N_IN_DEF   = 784;   // input synapses of layer 1
  localparam int unsigned N_HID_DEF  = 128;   // neurons of layer 1 (compressed)
  localparam int unsigned N_OUT_DEF  = 10;    // neurons of layer 2 (uncompressed)
  localparam int unsigned D_DEF      = 8;     // weights per codebook vector
  localparam int unsigned K_DEF      = 2048;  // codebook entries
  localparam int unsigned W_DEF      = 5;     // weight bits
  localparam int unsigned VW_DEF     = 11;    // membrane potential bits
  localparam int unsigned PORTS_DEF  = 2;     // codebook read ports (dual-port BRAM)
  localparam int unsigned T_DEF      = 25;    // time steps per input
  localparam int unsigned LEAK_DEF   = 4;     // leak: V -= V >>> LEAK_DEF (own choice)

  // Phase of a layer within one time step.
  typedef enum logic [2:0] {
    PH_IDLE    = 3'd0,  // waiting for sync
    PH_EXCITE  = 3'd1,  // feeding spikes of the previous layer (weight added)
    PH_INHIBIT = 3'd2,  // feeding the layer's own spikes (weight subtracted)
    PH_DRAIN   = 3'd3,  // letting the memory pipeline empty
    PH_EVAL    = 3'd4   // threshold compare, reset, leak
  } phase_t;

  // Reset after a spike: back to a fixed value, or threshold subtracted.
  typedef enum logic {
    RESET_HARD = 1'b0,
    RESET_SOFT = 1'b1
  } reset_mode_t;

  // Top-level controller state.
  typedef enum logic [1:0] {
    TOP_IDLE = 2'd0,  // no inference running
    TOP_WAIT = 2'd1,  // waiting for the next time step's input spikes
    TOP_RUN  = 2'd2   // layers working on a time step
  } top_state_t;

  // Ceiling division, for group counts when N is not a multiple of d.
  function automatic int unsigned cdiv(int unsigned a, int unsigned b);
    return (a + b - 1) / b;
  endfunction

  // Width of an index into n items (at least 1).
  function automatic int unsigned idxw(int unsigned n);
    return (n > 1) ? $clog2(n) : 1;
  endfunction

endpackage
