// ranc_pkg: constants and types shared by the RANC neuromorphic core and mesh.
//
// The default sizes are those of the baseline configuration that emulates
// TrueNorth behaviour: 256 axons x 256 neurons per core, four 9-bit signed
// weights per neuron, 9-bit signed potentials, thresholds, reset values and
// leak, and delivery up to 16 ticks ahead. The relative routing offsets dx/dy
// are 9-bit signed so a spike can travel up to 256 cores in each direction.
// The controller state names follow the eight-state machine of the core
// controller (states 0..7). The direction numbering and the CSRAM word layout
// (see ranc_core) are this design's own choice.
package ranc_pkg;

  // Core geometry (N(a), N(n), N(w), N(t)).
  localparam int unsigned DEF_NUM_AXONS   = 256;
  localparam int unsigned DEF_NUM_NEURONS = 256;
  localparam int unsigned DEF_NUM_WEIGHTS = 4;
  localparam int unsigned DEF_NUM_TICKS   = 16;

  // Bit widths (B(w), B(v), B(l)) and routing offset widths.
  localparam int unsigned DEF_WEIGHT_W = 9;
  localparam int unsigned DEF_POT_W    = 9;
  localparam int unsigned DEF_LEAK_W   = 9;
  localparam int unsigned DEF_DX_W     = 9;
  localparam int unsigned DEF_DY_W     = 9;

  // Core controller states, numbered as in the controller's state diagram.
  typedef enum logic [2:0] {
    S0_WAIT_TICK   = 3'd0,  // idle until the global tick
    S1_SET_ADDR    = 3'd1,  // advance scheduler slot, point CSRAM at neuron 0
    S2_WAIT_SRAM   = 3'd2,  // CSRAM read latency
    S3_FIRST_AXON  = 3'd3,  // load v_j(t-1) (+ weight of axon 0 if it spikes)
    S4_AXONS       = 3'd4,  // axons 1 .. N(a)-1
    S5_WRITEBACK   = 3'd5,  // write v_j(t) back, raise spike_valid
    S6_SPIKE_OFF   = 3'd6,  // drop spike_valid, next neuron or finish
    S7_CLEAR_SLOT  = 3'd7   // clear the scheduler slot consumed this tick
  } ctrl_state_t;

  // Router port numbering: the four mesh directions and the local core.
  typedef enum logic [2:0] {
    DIR_EAST  = 3'd0,
    DIR_WEST  = 3'd1,
    DIR_NORTH = 3'd2,
    DIR_SOUTH = 3'd3,
    DIR_LOCAL = 3'd4
  } dir_t;

  localparam int unsigned NUM_MESH_DIRS = 4;
  localparam int unsigned NUM_PORTS     = 5;

  // Saturating signed addition of two W-bit values, result W bits.
  function automatic logic signed [31:0] sat_limit_hi(int unsigned w);
    return (32'sd1 <<< (w - 1)) - 32'sd1;
  endfunction

  function automatic logic signed [31:0] sat_limit_lo(int unsigned w);
    return -(32'sd1 <<< (w - 1));
  endfunction

endpackage
