// lra_pkg: types and default sizes shared by the MSD-first (left-to-right)
// adder-tree beamformer.
//
// A signed digit in {-1, 0, +1} travels as a pair of bits (p, n) whose value is
// p - n ("borrow-save" form, one bit on a positive and one on a negative
// channel). The default sizes follow the paper's main configuration: 64
// channels of signed 16-bit samples, precision K from 1 to 16 bit planes, and
// 15 replicated cores on the device. The frame size (244608 real-valued
// channel sums) is the paper's workload. The state encoding of the core
// controller is this design's own choice.
package lra_pkg;

  // Paper: 64-channel adder tree (LRA64), signed 16-bit channel samples.
  localparam int unsigned N_CH_DEF      = 64;
  localparam int unsigned DATA_W_DEF    = 16;
  // Paper: up to 15 instances fit the XC7Z010 (Fig. 3 draws six of them).
  localparam int unsigned NUM_CORES_DEF = 15;
  // Paper: 122304 complex pixels, real and imaginary parts summed separately.
  localparam int unsigned FRAME_SUMS_DEF = 244608;
  // Paper: online delay of one LRA cell.
  localparam int unsigned CELL_DELTA    = 2;
  // Width of the precision setting K (values 1..16).
  localparam int unsigned K_W           = 5;

  typedef logic [K_W-1:0] k_t;

  // One radix-2 signed digit: value = p - n.
  typedef struct packed {
    logic p;
    logic n;
  } sd_t;

  // Phases of one core (Fig. 4 FSM Control).
  typedef enum logic [1:0] {
    ST_LOAD    = 2'd0,   // samples enter the register file, one per cycle
    ST_COMPUTE = 2'd1,   // K bit planes, then zero flush through the tree
    ST_DRAIN   = 2'd2    // hand the finished sum to the output register
  } core_state_e;

  // Cycles that the compute phase of a core lasts for precision k and a tree
  // of 'levels' levels: k digit cycles, then flush until the last output
  // digit of the root cell has been accumulated. Every level delays the
  // stream by CELL_DELTA cycles and lengthens it by one digit.
  function automatic int unsigned compute_cycles(int unsigned k, int unsigned levels);
    return k + (CELL_DELTA + 1) * levels;
  endfunction

endpackage
