// pt_pkg -- shared types, widths, graph description and swap-factor arithmetic
// for the sparsified parallel-tempering p-computer.
//
// The design solves a dense Ising problem (here BPSK MIMO detection, J = -H'H,
// h = H'y) on a sparse graph: every logical node i of L has two physical copies,
// copy 0 = p-bit i and copy 1 = p-bit i+L, so a replica holds N = 2L p-bits.
// The two copies are tied by a ferromagnetic "copy edge" of strength P, and each
// dense edge (i,j) appears exactly once, between one copy of i and one copy of j.
// Following the published weight count (upper triangle of the sparse matrix,
// L(L-1)/2 dense edges plus L copy edges, 2080 for L = 64) this package fixes
// the edge placement used here, which the source leaves open:
//   * edge (i,j), i<j, j-i odd  : p-bit i      -- p-bit j+L
//   * edge (i,j), i<j, j-i even : p-bit i+L    -- p-bit j
//   * copy edge of node i       : p-bit i      -- p-bit i+L
// This places every edge between the two halves, gives a maximum degree of
// L/2+1 (33 for L = 64, the published d_max), and is bipartite. The three
// colour groups are: copy-1 p-bits, even-index copy-0 p-bits, odd-index copy-0
// p-bits; no two p-bits in a group share an edge.
//
// Edge index order (the order in which the host writes J for one replica):
// dense edges in row-major upper-triangle order (0,1),(0,2),...,(L-2,L-1),
// then the L copy edges in node order.
//
// Swap factors mu are fixed point with MU_FRAC = 3 fractional bits and are
// computed here from beta and P schedules given in thousandths.
package pt_pkg;

  // ---------------------------------------------------------------- widths
  localparam int WJ       = 10;  // coupling weight width, Q6.3
  localparam int WH       = 10;  // bias width, Q6.3
  localparam int WI       = 7;   // clipped influence field width, 3 fraction bits
  localparam int FRAC     = 3;   // fraction bits of J, h and I
  localparam int WRNG     = 32;  // LFSR width
  localparam int MU_W     = 12;  // swap factor width (signed)
  localparam int MU_FRAC  = 3;   // swap factor fraction bits
  localparam int DLT_FRAC = 7;   // fraction bits of the swap log-probability
  localparam int NCOLOR   = 3;   // colour groups of the sparse graph
  localparam int SSR_W    = 16;  // sweep-to-swap ratio register width
  localparam int TIMER_W  = 32;  // run timer register width

  // ---------------------------------------------------- published schedules
  // 16x16 MIMO 2D-PT schedule (beta rows and P columns), in thousandths.
  localparam int BETA_MIMO16_M [9] = '{500, 760, 1100, 1550, 2220, 3310, 5340, 10300, 27900};
  localparam int P_MIMO16_M    [6] = '{100, 357, 658, 1020, 1500, 2260};

  // ------------------------------------------------------- control bundle
  // Phase enables and direction flags produced by the FSM and distributed to
  // every replica and swap controller.
  typedef struct packed {
    logic en_sweep;  // Monte Carlo sweep phase
    logic en_acc;    // energy accumulation phase
    logic en_inf;    // infeasibility count (one cycle)
    logic en_b;      // beta swap phase
    logic dir_b;     // beta pairing: 0 even pairs (0-1, 2-3, ..), 1 odd pairs
    logic en_p;      // P swap phase
    logic dir_p;     // P pairing: 0 even pairs, 1 odd pairs
  } pt_ctrl_t;

  typedef enum logic [2:0] {
    ST_IDLE   = 3'd0,
    ST_SWEEP  = 3'd1,
    ST_ENERGY = 3'd2,
    ST_ACC    = 3'd3,
    ST_INFEAS = 3'd4,
    ST_SWAP   = 3'd5
  } pt_state_e;

  // Index of p-bit state-injection sources in the 4-bit swap vector.
  localparam int SW_BM1 = 0;  // from beta-1 neighbour (hotter)
  localparam int SW_BP1 = 1;  // from beta+1 neighbour (colder)
  localparam int SW_PM1 = 2;  // from P-1 neighbour (weaker constraint)
  localparam int SW_PP1 = 3;  // from P+1 neighbour (stronger constraint)

  // ------------------------------------------------------ graph functions
  function automatic int num_edges(input int L);
    return L * (L - 1) / 2 + L;
  endfunction

  // Index of dense edge (i,j), i<j, in the row-major upper triangle.
  function automatic int dense_edge_idx(input int L, input int i, input int j);
    return i * L - (i * (i + 1)) / 2 + (j - i - 1);
  endfunction

  // Slot k of p-bit p (slot 0 is the copy edge, then the remaining
  // neighbours by ascending logical node index). With want_edge = 0 the
  // function returns the neighbour p-bit, otherwise the edge index; it
  // returns -1 when slot k does not exist.
  function automatic int nbr_of(input int L, input int p, input int k, input bit want_edge);
    int node, half, cnt, lo, hi, other;
    bit lo_is_copy0;
    node = (p < L) ? p : p - L;
    half = (p < L) ? 0 : 1;
    if (k == 0) begin
      if (want_edge) return L * (L - 1) / 2 + node;
      return (half == 0) ? node + L : node;
    end
    cnt = 1;
    for (int j = 0; j < L; j++) begin
      if (j != node) begin
        lo = (j < node) ? j : node;
        hi = (j < node) ? node : j;
        // odd distance: lo copy0 -- hi copy1 ; even: lo copy1 -- hi copy0
        lo_is_copy0 = ((hi - lo) % 2) == 1;
        if ((node == lo && (lo_is_copy0 ? half == 0 : half == 1)) ||
            (node == hi && (lo_is_copy0 ? half == 1 : half == 0))) begin
          if (cnt == k) begin
            if (want_edge) return dense_edge_idx(L, lo, hi);
            if (node == lo) other = lo_is_copy0 ? hi + L : hi;
            else            other = lo_is_copy0 ? lo : lo + L;
            return other;
          end
          cnt++;
        end
      end
    end
    return -1;
  endfunction

  function automatic int degree(input int L, input int p);
    int d;
    d = 0;
    for (int k = 0; k <= L; k++) if (nbr_of(L, p, k, 1'b0) >= 0) d++;
    return d;
  endfunction

  function automatic int max_degree(input int L);
    int m, d;
    m = 0;
    for (int p = 0; p < 2 * L; p++) begin
      d = degree(L, p);
      if (d > m) m = d;
    end
    return m;
  endfunction

  function automatic int nbr_node(input int L, input int p, input int k);
    return nbr_of(L, p, k, 1'b0);
  endfunction

  function automatic int nbr_edge(input int L, input int p, input int k);
    return nbr_of(L, p, k, 1'b1);
  endfunction

  // Colour group of p-bit p: 0 even copy-0, 1 copy-1, 2 odd copy-0.
  function automatic int color_of(input int L, input int p);
    if (p >= L) return 1;
    return (p % 2 == 0) ? 0 : 2;
  endfunction

  // Local-energy width for a p-bit with up to dmax neighbours.
  function automatic int we_local(input int dmax);
    return WJ + $clog2(dmax + 2);
  endfunction

  // Unique non-zero LFSR seed for stream number idx.
  function automatic logic [31:0] seed_of(input int idx);
    logic [31:0] s;
    s = (32'(idx) + 32'd1) * 32'h9E37_79B9;
    s = s ^ (s >> 15) ^ 32'h2545_F491;
    return (s == 32'd0) ? 32'h1 : s;
  endfunction

  // --------------------------------------------------- swap factor maths
  // Signed rounding division to nearest.
  function automatic int div_round(input longint num, input longint den);
    longint q;
    if ((num >= 0) == (den > 0)) q = (num + den / 2) / den;
    else                         q = (num - den / 2) / den;
    return int'(q);
  endfunction

  // mu0 = 1 - b_b/b_a and mu1 = 1 - b_a/b_b for the pair (a,b), MU_FRAC bits.
  function automatic int mu_beta0(input int beta_a_m, input int beta_b_m);
    return div_round((longint'(beta_a_m) - longint'(beta_b_m)) * longint'(1 << MU_FRAC),
                     longint'(beta_a_m));
  endfunction
  function automatic int mu_beta1(input int beta_a_m, input int beta_b_m);
    return div_round((longint'(beta_b_m) - longint'(beta_a_m)) * longint'(1 << MU_FRAC),
                     longint'(beta_b_m));
  endfunction

  // P-swap factor for row beta and columns with P_c, P_c+1:
  // mu = 2 * beta * (P_c+1 - P_c), MU_FRAC bits.
  function automatic int mu_p(input int beta_m, input int p_lo_m, input int p_hi_m);
    return div_round(longint'(2) * longint'(beta_m) * (longint'(p_hi_m) - longint'(p_lo_m))
                     * longint'(1 << MU_FRAC), longint'(1_000_000));
  endfunction

endpackage
