// mmm_pkg: constants and types shared by the matrix-multiplication kernel.
//
// The default sizes are those of the unsigned 32-bit kernel in the table of
// highest-performing builds: a chain of N_P = 202 processing elements, each
// holding Y_C = 8 compute units (x_c = 1), and a memory tile of
// X_TOT x Y_TOT = 1212 x 1360 output elements. The 512-bit memory word is the
// minimum DDR4 transfer width. Every module takes these as parameter defaults
// so a testbench can build a smaller kernel.
package mmm_pkg;

  localparam int unsigned W_DEFAULT        = 32;    // data width w_c in bits
  localparam int unsigned Y_C_DEFAULT      = 8;     // compute units per PE
  localparam int unsigned N_P_DEFAULT      = 202;   // PEs in the chain (x_p)
  localparam int unsigned X_TOT_DEFAULT    = 1212;  // memory tile rows
  localparam int unsigned Y_TOT_DEFAULT    = 1360;  // memory tile columns
  localparam int unsigned MEM_BITS_DEFAULT = 512;   // off-chip word width
  localparam int unsigned ADDR_W_DEFAULT   = 32;    // word address width
  localparam int unsigned DIM_W            = 32;    // width of m, n, k

  // Control bits that travel with every B beat through the PE chain.
  typedef struct packed {
    logic first_row;  // first beat of a PE row: swap in the preloaded A value
    logic first_k;    // k == 0: store the product instead of accumulating
    logic last_tile;  // last beat of the memory tile: start draining C
  } b_ctrl_t;

  // Operation of the compute units. The default is the ordinary product; the
  // distance (min-plus) product replaces multiply by add and add by minimum.
  typedef enum logic {
    OP_MUL_ADD = 1'b0,  // c = c + a*b
    OP_ADD_MIN = 1'b1   // c = min(c, a+b)
  } cu_op_t;

  // Drain phases of a processing element.
  typedef enum logic [1:0] {
    DR_IDLE = 2'd0,  // computing, or nothing to drain
    DR_OWN  = 2'd1,  // sending one row of the PE's own C buffer
    DR_FWD  = 2'd2   // forwarding rows of the PEs further down the chain
  } drain_state_t;

  // Sequencer states of Feed B.
  typedef enum logic [2:0] {
    FB_IDLE   = 3'd0,
    FB_WAIT   = 3'd1,  // waiting for a full B row and for the PEs' A values
    FB_STREAM = 3'd2,  // streaming one B row into the chain
    FB_DRAIN  = 3'd3,  // tile computed, waiting for Write C to finish it
    FB_DONE   = 3'd4
  } feed_state_t;

endpackage
