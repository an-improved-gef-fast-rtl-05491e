// igef_carry_net -- timing-driven carry tree of the IGEF adder.
//
// The structure of the tree is worked out while the design is elaborated,
// by running the IGEF procedure on the delay profile DP (DP[i] is the time,
// in operator delays, at which bit i of both operands is available):
//   1. Every bit starts as a term of its own, with time DP[i].  The term of
//      bit 0 is already the carry c_0 = g_0.
//   2. At time t = 0, 1, 2, ... every term whose time is <= t is ready.
//      Each maximal run of adjacent ready terms is cut, from its least
//      significant end, into groups of at most three; each group of two or
//      three terms is merged by one circle (igef_op3) and the new term gets
//      time max(input times) + 1.  A group of one waits for a neighbour.
//      A merged group that starts at bit 0 is a carry ("carry from the LSB").
//   3. Repeat until a single term, the carry out, covers all N bits.
// This yields the carries on the critical spine only (Fig. 2(a) of the
// paper: C2 and C8 for nine bits).  Every other carry c_i is then added
// (Fig. 2(b)): take the first spine carry above i, which merges the carry
// c_k below i with one or two blocks; c_i merges c_k with the full blocks
// below i and the prefix of the block holding i.  A block prefix reuses the
// sub-blocks of that block, so it is ready no later than the block itself
// and no spine carry is slowed.
// Steps 1 to 3 follow the paper's Section 4.1; the cut into groups from the
// LSB end, the waiting of single terms and the way the non-spine carries are
// filled in are this design's reading of it, chosen to reproduce Fig. 2(b)
// and the timings of Table 2.
// Interface: gr[i] is the (g, r) pair of bit i, c[i] the carry out of bit i.
// Purely combinational.  CTIME[i] is the time of c[i] in operator delays,
// counted from time 0 with inputs of bit i arriving at DP[i].
module igef_carry_net
  import igef_pkg::*;
#(
  parameter int unsigned N = 9,
  parameter int unsigned DP [N] = '{default: 0}
) (
  input  gr_t          gr [N],
  output logic [N-1:0] c
);

  // Upper bound on the number of circles: at most N-1 on the spine and, for
  // each other carry, one circle per level of the block it falls into.
  localparam int MAXNODES = N * N + 1;

  typedef struct packed {
    int nin;   // 2 or 3 inputs
    int in0;   // least significant input, an id in v
    int in1;
    int in2;   // most significant input when nin == 3
    int tm;    // time at which the output is ready
    int lo;    // least significant bit covered (0: the output is a carry)
  } node_t;

  typedef struct packed {
    int                   nnodes;
    int                   overflow;
    node_t [MAXNODES-1:0] node;
    logic [N-1:0][31:0]   cid;    // id in v of carry i
    logic [N-1:0][31:0]   ctm;    // time of carry i
  } plan_t;

  function automatic plan_t build_plan();
    plan_t pl;
    // Current list of terms, LSB first: range, id in v, time.
    int t_lo [N];
    int t_hi [N];
    int t_id [N];
    int t_tm [N];
    int x_lo [N];
    int x_hi [N];
    int x_id [N];
    int x_tm [N];
    // Every id in v: range, time, inputs.  Ids below N are the bits.
    int n_lo [N+MAXNODES];
    int n_hi [N+MAXNODES];
    int n_tm [N+MAXNODES];
    int n_nin [N+MAXNODES];
    int n_in0 [N+MAXNODES];
    int n_in1 [N+MAXNODES];
    int n_in2 [N+MAXNODES];
    // Path from a block down to the prefix that ends at a given bit.
    int p_ns [N+MAXNODES];
    int p_s0 [N+MAXNODES];
    int p_s1 [N+MAXNODES];
    int m, k, j, run_end, cnt, t, t_max, nn, depth, cur, nxt, res;
    int i0, i1, i2, ni, mx, t1, t2, lo0;
    int sp;

    pl.nnodes = 0;
    pl.overflow = 0;
    for (int q = 0; q < MAXNODES; q++) pl.node[q] = '0;
    for (int q = 0; q < N + MAXNODES; q++) begin
      n_lo[q] = 0;  n_hi[q] = 0;  n_tm[q] = 0;  n_nin[q] = 0;
      n_in0[q] = 0;  n_in1[q] = 0;  n_in2[q] = 0;
      p_ns[q] = 0;  p_s0[q] = 0;  p_s1[q] = 0;
    end
    nn = N;
    t_max = 0;
    for (int i = 0; i < N; i++) begin
      n_lo[i] = i;  n_hi[i] = i;  n_tm[i] = int'(DP[i]);  n_nin[i] = 0;
      t_lo[i] = i;  t_hi[i] = i;  t_id[i] = i;  t_tm[i] = int'(DP[i]);
      pl.cid[i] = -1;
      if (int'(DP[i]) > t_max) t_max = int'(DP[i]);
    end
    pl.cid[0] = 0;
    m = N;
    t = 0;

    // Spine: merge ready adjacent terms, time step by time step.
    while (m > 1 && t <= t_max + 2 * N) begin
      k = 0;
      j = 0;
      while (j < m) begin
        if (t_tm[j] > t) begin
          x_lo[k] = t_lo[j]; x_hi[k] = t_hi[j]; x_id[k] = t_id[j]; x_tm[k] = t_tm[j];
          k++;
          j++;
        end else begin
          run_end = j;
          while (run_end + 1 < m && t_tm[run_end + 1] <= t) run_end++;
          while (j <= run_end) begin
            cnt = run_end - j + 1;
            if (cnt > 3) cnt = 3;
            if (cnt == 1) begin
              x_lo[k] = t_lo[j]; x_hi[k] = t_hi[j]; x_id[k] = t_id[j]; x_tm[k] = t_tm[j];
            end else begin
              i0 = t_id[j];
              i1 = t_id[j + 1];
              i2 = (cnt == 3) ? t_id[j + 2] : 0;
              mx = (t_tm[j] > t_tm[j + 1]) ? t_tm[j] : t_tm[j + 1];
              if (cnt == 3 && t_tm[j + 2] > mx) mx = t_tm[j + 2];
              if (nn < N + MAXNODES) begin
                n_nin[nn] = cnt;
                n_in0[nn] = i0;  n_in1[nn] = i1;  n_in2[nn] = i2;
                n_lo[nn] = t_lo[j];
                n_hi[nn] = t_hi[j + cnt - 1];
                n_tm[nn] = mx + 1;
                x_lo[k] = n_lo[nn]; x_hi[k] = n_hi[nn]; x_id[k] = nn; x_tm[k] = mx + 1;
                if (n_lo[nn] == 0) pl.cid[n_hi[nn]] = nn;
                nn++;
              end else begin
                pl.overflow = 1;
              end
            end
            k++;
            j += cnt;
          end
        end
      end
      for (int q = 0; q < k; q++) begin
        t_lo[q] = x_lo[q]; t_hi[q] = x_hi[q]; t_id[q] = x_id[q]; t_tm[q] = x_tm[q];
      end
      m = k;
      t++;
    end
    if (m != 1) pl.overflow = 1;

    // Fill in every carry that is not on the spine, LSB first.
    for (int i = 1; i < N; i++) begin
      if (pl.cid[i] == -1) begin
        // First spine carry above i: inputs (c_k, block1 [, block2]).
        sp = -1;
        for (int q = N - 1; q > i; q--) if (pl.cid[q] != -1) sp = pl.cid[q];
        lo0 = n_in0[sp];
        t1  = n_in1[sp];
        t2  = (n_nin[sp] == 3) ? n_in2[sp] : -1;
        // Walk down from the block that holds bit i.
        cur = (i <= n_hi[t1]) ? t1 : t2;
        depth = 0;
        while (n_hi[cur] != i) begin
          if (i <= n_hi[n_in0[cur]]) begin
            p_ns[depth] = 0;
            nxt = n_in0[cur];
          end else if (i <= n_hi[n_in1[cur]]) begin
            p_ns[depth] = 1;
            p_s0[depth] = n_in0[cur];
            nxt = n_in1[cur];
          end else begin
            p_ns[depth] = 2;
            p_s0[depth] = n_in0[cur];
            p_s1[depth] = n_in1[cur];
            nxt = n_in2[cur];
          end
          depth++;
          cur = nxt;
        end
        // Build the prefix bottom up, then the carry itself (step d == -1).
        res = cur;
        for (int d = depth - 1; d >= -1; d--) begin
          if (d >= 0) begin
            ni = p_ns[d] + 1;
            i0 = p_s0[d];
            i1 = (ni == 3) ? p_s1[d] : res;
            i2 = (ni == 3) ? res : 0;
          end else if (i <= n_hi[t1]) begin
            ni = 2;  i0 = lo0;  i1 = res;  i2 = 0;
          end else begin
            ni = 3;  i0 = lo0;  i1 = t1;  i2 = res;
          end
          if (ni > 1) begin
            mx = (n_tm[i0] > n_tm[i1]) ? n_tm[i0] : n_tm[i1];
            if (ni == 3 && n_tm[i2] > mx) mx = n_tm[i2];
            if (nn < N + MAXNODES) begin
              n_nin[nn] = ni;
              n_in0[nn] = i0;  n_in1[nn] = i1;  n_in2[nn] = i2;
              n_lo[nn] = n_lo[i0];
              n_hi[nn] = i;
              n_tm[nn] = mx + 1;
              res = nn;
              nn++;
            end else begin
              pl.overflow = 1;
            end
          end
        end
        pl.cid[i] = res;
      end
    end

    pl.nnodes = nn - N;
    for (int q = 0; q < nn - N; q++) begin
      pl.node[q].nin = n_nin[N + q];
      pl.node[q].in0 = n_in0[N + q];
      pl.node[q].in1 = n_in1[N + q];
      pl.node[q].in2 = n_in2[N + q];
      pl.node[q].tm  = n_tm[N + q];
      pl.node[q].lo  = n_lo[N + q];
    end
    for (int i = 0; i < N; i++) pl.ctm[i] = n_tm[pl.cid[i]];
    return pl;
  endfunction

  localparam plan_t PLAN   = build_plan();
  localparam int    NNODES = PLAN.nnodes;

  function automatic int max_ctime();
    int mx = 0;
    for (int i = 0; i < N; i++) if (PLAN.ctm[i] > mx) mx = PLAN.ctm[i];
    return mx;
  endfunction

  // Time of the slowest carry, in operator delays.
  localparam int CARRY_DEPTH = max_ctime();

  if (N < 2 || PLAN.overflow != 0) begin : g_bad_plan
    $error("igef_carry_net: no carry tree for N=%0d", N);
  end

  // One generate scope per id: ids below N carry the input bits, the rest
  // are the circles, each reading the outputs of lower ids.
  for (genvar k = 0; k < N + NNODES; k++) begin : g_v
    gr_t y;
    if (k < N) begin : g_bit
      assign y = gr[k];
    end else begin : g_circle
      localparam node_t ND = PLAN.node[k - N];
      if (ND.nin == 3) begin : g_three
        igef_op3 u_op (.lo(g_v[ND.in0].y), .mid(g_v[ND.in1].y), .hi(g_v[ND.in2].y), .y(y));
      end else begin : g_two
        igef_op3 u_op (.lo(g_v[ND.in0].y), .mid(g_v[ND.in1].y), .hi(GR_IDENT), .y(y));
      end
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_carry
    assign c[i] = g_v[PLAN.cid[i]].y.g;
  end

endmodule
