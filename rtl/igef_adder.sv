// igef_adder -- N-bit adder with an IGEF (improved generalized earliest-first)
// carry tree.
//
// sum = a + b as an (N+1)-bit result {cout, s}.  The operands need not
// arrive together: DP[i] is the arrival time of bit i of both operands,
// in units of one carry-tree operator delay, and the carry tree is shaped at
// elaboration so that late bits are merged last (see igef_carry_net).  The
// default, nine bits all arriving at time 0, gives the tree of Fig. 2(b) of
// the paper: three-bit blocks at level 1 and every carry C3..C8 at level 2.
// Datapath: igef_pgr forms p, g, r per bit; igef_carry_net forms c_0..c_(N-1)
// with c_0 = g_0; igef_sum forms s_i = p_i ^ c_(i-1).  There is no carry
// input, as in the paper.  Purely combinational.  u_carry.CARRY_DEPTH is
// the time of the latest carry in operator delays; the sum bits follow one
// XOR later.  N must be at least 2.
// The three stages and their equations follow the paper; taking the delay
// profile as an elaboration parameter, and leaving out registers and a carry
// input, are this design's choices.
module igef_adder
  import igef_pkg::*;
#(
  parameter int unsigned N = 9,
  parameter int unsigned DP [N] = '{default: 0}
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] s,
  output logic         cout
);

  logic [N-1:0] p;
  gr_t          gr [N];
  logic [N-1:0] c;

  igef_pgr #(.N(N)) u_pgr (
    .a (a),
    .b (b),
    .p (p),
    .gr(gr)
  );

  igef_carry_net #(.N(N), .DP(DP)) u_carry (
    .gr(gr),
    .c (c)
  );

  igef_sum #(.N(N)) u_sum (
    .p   (p),
    .c   (c),
    .s   (s),
    .cout(cout)
  );

endmodule
