// sscd_pkg: constants and types shared by the (16,11) systematic successive
// cancellation (S-SC) polar decoder.
//
// Code: x = u * F^{(x)n} in natural bit order with the lower-triangular kernel
// F = [1 0; 1 1], so that u_0 is decided first and the g function combines
// La = L[k] with the partial sum, as in the decoding diagram and the PE table
// of the architecture. N = 16, K = 11, n = 4 stages of processing elements.
//
// LLRs are sign-magnitude words of Q bits: bit Q-1 is the sign (1 = negative
// LLR = bit value 1), bits Q-2..0 the magnitude. Q = 5 is the word length the
// design is evaluated with; 6 and 10 are the other synthesised variants.
//
// The frozen set is a design choice (the architecture description does not
// list one): the five least reliable positions {0,1,2,4,8} by the
// Bhattacharyya bound at z = 0.5 for N = 16.
package sscd_pkg;

  localparam int unsigned N     = 16;       // code length
  localparam int unsigned K     = 11;       // information bits
  localparam int unsigned Q     = 5;        // LLR word length (sign + magnitude)

  // bit i = 1 marks u_i as frozen (always 0)
  localparam logic [N-1:0] FROZEN_MASK = 16'h0117;

  // Control FSM states
  typedef enum logic {
    ST_IDLE   = 1'b0,   // no frame held, waiting for LLRs
    ST_DECODE = 1'b1    // decoding a frame, two bits per clock
  } ctrl_state_e;

endpackage
