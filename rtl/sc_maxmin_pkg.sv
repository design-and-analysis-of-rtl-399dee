// Shared types for the shift-register stochastic max/min unit.
//
// sc_mode_e selects, at elaboration time, whether the unit computes the
// maximum or the minimum of its two unipolar stochastic input streams. The
// minimum is obtained from the maximum circuit by inverting both inputs and
// the output (min(a,b) = 1 - max(1-a, 1-b)).
package sc_maxmin_pkg;

  typedef enum logic {
    SC_MAX = 1'b0,  // C encodes max(a, b)
    SC_MIN = 1'b1   // C encodes min(a, b)
  } sc_mode_e;

  // Default shift-register length. L = 15 (M = L+1 = 16 FSM states) is the
  // length that minimises the expected error for streams of N = 10^4 bits.
  localparam int unsigned SR_LEN_DEFAULT = 15;

endpackage
