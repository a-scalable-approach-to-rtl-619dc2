// unary_pkg: constants and types shared by the scalable unary multiplier and
// the hybrid binary-unary neuron built from it.
//
// N_BITS is the binary precision n of an operand, so an operand's full unary
// stream would be 2^n bits long. The scalable multiplier downscales each
// operand to its HALF_BITS = n/2 upper bits (a 2^(n/2)-bit stream) and keeps
// the lower n/2 bits as the error term. The default n = 8 (256-bit output
// streams) is the length used for the arithmetic-function and matrix
// experiments; 4 and 6 are the other lengths evaluated. LANES = 6 is the
// number of input/weight pairs drawn in the neuron diagram, and
// MAX_TERMS = 2048 is the inner dimension of the matrix product evaluated
// ([2048 x 2048] times [2048 x 128]).
package unary_pkg;

  localparam int unsigned N_BITS    = 8;
  localparam int unsigned HALF_BITS = N_BITS / 2;
  localparam int unsigned LANES     = 6;
  localparam int unsigned MAX_TERMS = 2048;

  // Sideband carried through the multiplier pipeline with each product of
  // the neuron: whether the lane holds a real term, whether its weight is
  // negative, and whether it belongs to the last group of a dot product.
  typedef struct packed {
    logic en;
    logic neg;
    logic last;
  } term_tag_t;

endpackage
