// sdscn_pkg -- shared constants and types of the selective-decoding
// sparse-clustered-network (SD-SCN) associative memory.
//
// The network has C clusters of L binary neurons each. A stored message is C
// sub-messages of log2(L) bits; each sub-message selects one neuron of its
// cluster and the selected neurons are joined pairwise into a clique. The
// defaults are the largest configuration the design was reported at: C = 8,
// L = 400 (3200 neurons), at most BETA = 2 active neurons passed serially per
// cluster and IT = 4 decoding iterations. The controller state type and the
// access-delay formula 2 + (BETA+1)*(IT-1) (11 cycles at the defaults) live
// here so that the RTL and the testbenches use the same definition.
package sdscn_pkg;

  // Default network size (8 clusters x 400 neurons = 3200 neurons).
  localparam int unsigned C_DEF    = 8;
  localparam int unsigned L_DEF    = 400;
  // Serial link reads per cluster and iteration, and number of iterations.
  localparam int unsigned BETA_DEF = 2;
  localparam int unsigned IT_DEF   = 4;

  // Read states of the iteration controller.
  typedef enum logic [1:0] {
    ST_IDLE = 2'd0,  // waiting for a request; first link read issued on start
    ST_IT1  = 2'd1,  // first iteration: link words from the local decoders
    ST_SER  = 2'd2,  // later iterations: BETA serial reads, then one update
    ST_OUT  = 2'd3   // load the output registers
  } ctrl_state_e;

  // Clock edges from the edge that accepts a read request to the edge that
  // loads the output registers.
  function automatic int unsigned access_delay(int unsigned beta, int unsigned it);
    return 2 + (beta + 1) * (it - 1);
  endfunction

endpackage
