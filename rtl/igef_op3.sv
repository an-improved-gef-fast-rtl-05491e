// igef_op3 -- one circle of the IGEF carry tree.
//
// Combines up to three adjacent (g, r) terms, least significant first, into
// the (G, R) pair of the whole block: y = (lo nabla mid) nabla hi.  As the
// paper describes for a three-term block, the circle is a cascade of two
// nabla operators; for a two-term circle the hi input is tied to the
// identity GR_IDENT.  When lo is a carry (a term that starts at bit 0), y.g
// is the carry out of the block's top bit.  Purely combinational; the
// carry-tree timing counts one circle as one operator delay, whether it
// merges two or three terms.
module igef_op3
  import igef_pkg::*;
(
  input  gr_t lo,
  input  gr_t mid,
  input  gr_t hi,
  output gr_t y
);

  gr_t lm;

  always_comb begin
    lm = gr_nabla(lo, mid);
    y  = gr_nabla(lm, hi);
  end

endmodule
