// igef_pkg -- types and operators shared by the IGEF adder.
//
// An IGEF adder forms its carries from per-bit (g, r) pairs, where
// g_i = a_i & b_i (generate) and r_i = a_i | b_i (carry transmit).  Two
// adjacent terms are merged with the "nabla" operator:
//   x nabla (y, z)                 = y | (z & x)
//   (alpha, beta) nabla (gamma, delta) = (alpha nabla (gamma, delta), beta & delta)
//                                      = (gamma | delta & alpha, beta & delta)
// where (alpha, beta) is the less significant term and (gamma, delta) the
// more significant one.  The G of a term that starts at bit 0 is the carry
// out of its most significant bit.  (g = 0, r = 1) is the identity of the
// operator and fills the unused input of a two-input circle.
// The operator definitions follow the paper's algebra; the struct layout and
// the identity constant are this design's own.
package igef_pkg;

  // A (generate, transmit) pair for a bit or for a block of adjacent bits.
  typedef struct packed {
    logic g;
    logic r;
  } gr_t;

  localparam gr_t GR_IDENT = '{g: 1'b0, r: 1'b1};

  // Bit-level ternary operator: x nabla (y, z) = y + z.x
  function automatic logic nabla(input logic x, input logic y, input logic z);
    return y | (z & x);
  endfunction

  // Group operator on (g, r) pairs; lo is the less significant term.
  function automatic gr_t gr_nabla(input gr_t lo, input gr_t hi);
    gr_t y;
    y.g = nabla(lo.g, hi.g, hi.r);
    y.r = lo.r & hi.r;
    return y;
  endfunction

endpackage
