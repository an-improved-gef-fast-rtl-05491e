// igef_pgr -- bit-level setup of the IGEF adder.
//
// For every bit position i it forms the three primitive terms of the
// paper's carry and sum equations: p_i = a_i ^ b_i (used only by the sum),
// g_i = a_i & b_i and r_i = a_i | b_i (used by the carry tree).  Purely
// combinational, one gate level.  Interface: operands a, b of N bits in,
// p as a vector and (g, r) as an unpacked array of gr_t out.
// The equations are the paper's; the port layout is this design's own.
module igef_pgr
  import igef_pkg::*;
#(
  parameter int unsigned N = 9
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] p,
  output gr_t          gr [N]
);

  always_comb begin
    p = a ^ b;
    for (int i = 0; i < N; i++) begin
      gr[i].g = a[i] & b[i];
      gr[i].r = a[i] | b[i];
    end
  end

endmodule
