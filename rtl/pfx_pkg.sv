// pfx_pkg -- shared types and elaboration-time construction functions for
// the arrival-time driven prefix carry and prefix adder circuits.
//
// Nothing in this package becomes hardware by itself. It holds:
//   * gp_t, the (generate, propagate) signal pair that every prefix
//     structure passes around;
//   * at_vec_t, a flat vector of per-input arrival times (TW bits each,
//     input i in bits [i*TW +: TW], input 0 = least significant position);
//   * constant functions that run the Fibonacci-tree splitting algorithm
//     while the design is elaborated: they decide where each prefix tree is
//     split, and compute the logic delay the finished tree will have.
//
// Delay model: every 2-input gate costs one time unit, an input pair
// (g_i, p_i) is available at its arrival time t_i. A prefix gate gives
//   p_out = max(p_l, p_r) + 1
//   g_out = max(g_l + 1, max(p_l, g_r) + 2)
// which is the exact longest-path delay of the three-gate gadget.
//
// Leaf counting follows the construction: input i owns F(t_i+3)-1 leaves
// of a Fibonacci tree whose size F(k) is the first Fibonacci number not
// below the total; each split sends F(k-2) leaves right (low indices) and
// F(k-1) left. Before that, arrival times are raised to at least
// max(t) - GAMMA*ceil(log_phi n) and shifted so the earliest is 0; this is
// the rounding step that keeps all leaf counts small (within 64 bits).
// Two rules are this design's own: when a split would leave one side
// empty, the boundary input is moved over to make it proper, and an input
// whose leaves all fell on the other side keeps a count of zero.
package pfx_pkg;

  typedef struct packed {
    logic g;
    logic p;
  } gp_t;

  localparam int TW   = 8;    // bits per arrival time
  localparam int MAXN = 256;  // most inputs one arrival-time vector can hold
  localparam int TMAX = (1 << TW) - 1;

  typedef logic [MAXN*TW-1:0] at_vec_t;

  // Result of one split of a prefix tree.
  typedef struct packed {
    logic [31:0] nr;   // number of inputs that go to the right (low) subtree
    logic [63:0] rhi;  // leaf count of the highest input of the right side
    logic [63:0] llo;  // leaf count of the lowest input of the left side
  } split_t;

  // Exact (generate, propagate) delays of a subtree output.
  typedef struct packed {
    logic [31:0] dg;
    logic [31:0] dp;
  } dly_t;

  function automatic int imax(int a, int b);
    return (a > b) ? a : b;
  endfunction

  function automatic int at_get(at_vec_t t, int i);
    return int'(t[i*TW +: TW]);
  endfunction

  function automatic at_vec_t at_set(at_vec_t t, int i, int v);
    at_vec_t       r;
    logic [TW-1:0] c;
    r = t;
    c = (v > TMAX) ? TW'(TMAX) : ((v < 0) ? '0 : TW'(v));
    r[i*TW +: TW] = c;
    return r;
  endfunction

  // Fibonacci numbers, F(0) = 0, F(1) = 1.
  function automatic longint fib(int n);
    longint a, b, c;
    a = 0;
    b = 1;
    if (n <= 0) return 0;
    for (int i = 1; i < n; i++) begin
      c = a + b;
      a = b;
      b = c;
    end
    return b;
  endfunction

  // Leaves owned by an input with (normalised) arrival time t.
  function automatic longint leaves(int t);
    return fib(t + 3) - 1;
  endfunction

  // Smallest k >= 1 with F(k) >= s.
  function automatic int fib_index(longint s);
    int k;
    k = 1;
    while (fib(k) < s) k++;
    return k;
  endfunction

  // Smallest m >= 0 with phi^m >= n.
  function automatic int ceil_log_phi(int n);
    real x;
    int  m;
    x = 1.0;
    m = 0;
    while (x < real'(n)) begin
      x = x * 1.6180339887498949;
      m++;
    end
    return m;
  endfunction

  function automatic int ceil_sqrt(int n);
    int l;
    l = 1;
    while (l * l < n) l++;
    return l;
  endfunction

  // Arrival times after rounding up to max(t) - gamma*ceil(log_phi n),
  // before the common shift.
  function automatic int rounded_at(at_vec_t t, int n, int gamma, int i);
    int tmax, lim;
    tmax = 0;
    for (int j = 0; j < n; j++) tmax = imax(tmax, at_get(t, j));
    lim = tmax - gamma * ceil_log_phi(n);
    return imax(at_get(t, i), lim);
  endfunction

  // Common shift: the earliest rounded arrival time.
  function automatic int norm_shift(at_vec_t t, int n, int gamma);
    int m;
    m = TMAX;
    for (int j = 0; j < n; j++) begin
      if (rounded_at(t, n, gamma, j) < m) m = rounded_at(t, n, gamma, j);
    end
    return m;
  endfunction

  function automatic at_vec_t normalize(at_vec_t t, int n, int gamma);
    at_vec_t r;
    int      s;
    r = '0;
    s = norm_shift(t, n, gamma);
    for (int j = 0; j < n; j++) r = at_set(r, j, rounded_at(t, n, gamma, j) - s);
    return r;
  endfunction

  function automatic longint leaf_sum(at_vec_t tn, int n);
    longint s;
    s = 0;
    for (int j = 0; j < n; j++) s += leaves(at_get(tn, j));
    return s;
  endfunction

  // Leaf count of input i of a subproblem: the two boundary inputs may
  // hold fewer than their full share, inner inputs hold all of theirs.
  function automatic longint cnt(at_vec_t tn, int n, longint clo, longint chi, int i);
    if (i == 0) return clo;
    if (i == n - 1) return chi;
    return leaves(at_get(tn, i));
  endfunction

  // One split of a subproblem with n >= 2 inputs and Fibonacci index k.
  function automatic split_t split(at_vec_t tn, int n, int k, longint clo, longint chi);
    split_t s;
    longint fr, cum, f, c, rhi, llo;
    int     j, nr;
    bit     jr, forced;
    fr     = fib(k - 2);
    cum    = 0;
    f      = 0;
    j      = -1;
    jr     = 1'b0;
    forced = 1'b0;
    for (int i = 0; i < n; i++) begin
      c = cnt(tn, n, clo, chi, i);
      if (j < 0) begin
        if (cum + c >= fr) begin
          j = i;
          f = fr - cum;
        end else begin
          cum += c;
        end
      end
    end
    if (j < 0) begin
      nr = n - 1;
    end else if (f >= fib(at_get(tn, j) + 1)) begin
      nr = j + 1;
      jr = 1'b1;
    end else begin
      nr = j;
    end
    if (nr == 0) begin
      nr = 1;
      forced = 1'b1;
    end
    if (nr == n) begin
      nr = n - 1;
      forced = 1'b1;
    end
    rhi = cnt(tn, n, clo, chi, nr - 1);
    if (!forced && jr && (j == nr - 1)) rhi = f;
    llo = cnt(tn, n, clo, chi, nr);
    if (!forced && (j >= 0) && !jr && (j == nr)) llo = cnt(tn, n, clo, chi, j) - f;
    s.nr  = 32'(nr);
    s.rhi = 64'(rhi);
    s.llo = 64'(llo);
    return s;
  endfunction

  // Fibonacci index of the right and left children of a subproblem.
  function automatic int k_right(int k);
    return (k > 3) ? k - 2 : 1;
  endfunction

  function automatic int k_left(int k);
    return (k > 2) ? k - 1 : 1;
  endfunction

  // Exact delay of the tree the splitting builds; structure from the
  // normalised times tn, delays from the original times to.
  function automatic dly_t tree_delay(at_vec_t tn, at_vec_t to, int n, int k,
                                      longint clo, longint chi);
    dly_t   d, l, r;
    split_t s;
    int     nr;
    if (n == 1) begin
      d.dg = 32'(at_get(to, 0));
      d.dp = 32'(at_get(to, 0));
      return d;
    end
    s  = split(tn, n, k, clo, chi);
    nr = int'(s.nr);
    r  = tree_delay(tn, to, nr, k_right(k), clo, longint'(s.rhi));
    l  = tree_delay(tn >> (nr * TW), to >> (nr * TW), n - nr, k_left(k),
                    longint'(s.llo), chi);
    d.dp = 32'(imax(int'(l.dp), int'(r.dp)) + 1);
    d.dg = 32'(imax(int'(l.dg) + 1, imax(int'(l.dp), int'(r.dg)) + 2));
    return d;
  endfunction

  // Fibonacci index k of the root of a carry tree (normalised instance).
  function automatic int root_k(at_vec_t t, int n, int gamma);
    return fib_index(leaf_sum(normalize(t, n, gamma), n));
  endfunction

  // Logic delay of the carry tree output pair for inputs t (the generate
  // output is never earlier than the propagate output).
  function automatic int carry_delay(at_vec_t t, int n, int gamma);
    at_vec_t tn;
    dly_t    d;
    tn = normalize(t, n, gamma);
    d  = tree_delay(tn, t, n, root_k(t, n, gamma), leaves(at_get(tn, 0)),
                    leaves(at_get(tn, n - 1)));
    return imax(int'(d.dg), int'(d.dp));
  endfunction

  // Grouping of the parallel prefix graph: ceil(sqrt(n)) groups of
  // consecutive inputs, sizes differing by at most one, larger groups at
  // the low end.
  function automatic int grp_count(int n);
    return ceil_sqrt(n);
  endfunction

  function automatic int grp_size(int n, int i);
    int l;
    l = grp_count(n);
    return n / l + ((i < n % l) ? 1 : 0);
  endfunction

  function automatic int grp_start(int n, int i);
    int l;
    l = grp_count(n);
    return i * (n / l) + ((i < n % l) ? i : n % l);
  endfunction

  // Arrival times of the group results Z_1..Z_{l-1}: the delay of the
  // carry tree that computes each of them.
  function automatic at_vec_t group_at(at_vec_t t, int n, int gamma);
    at_vec_t r;
    int      l;
    r = '0;
    l = grp_count(n);
    for (int i = 0; i < l - 1; i++) begin
      r = at_set(r, i, carry_delay(t >> (grp_start(n, i) * TW), grp_size(n, i), gamma));
    end
    return r;
  endfunction

  // ---- evaluation of a finished parallel prefix graph (used for
  // reporting; none of it shapes the hardware)

  // Per-output (generate, propagate) delays of a prefix graph.
  typedef struct packed {
    at_vec_t g;
    at_vec_t p;
  } dvec_t;

  function automatic dly_t gate_dly(dly_t l, dly_t r);
    dly_t d;
    d.dp = 32'(imax(int'(l.dp), int'(r.dp)) + 1);
    d.dg = 32'(imax(int'(l.dg) + 1, imax(int'(l.dp), int'(r.dg)) + 2));
    return d;
  endfunction

  function automatic dly_t dv_get(dvec_t v, int i);
    dly_t d;
    d.dg = 32'(at_get(v.g, i));
    d.dp = 32'(at_get(v.p, i));
    return d;
  endfunction

  function automatic dvec_t dv_set(dvec_t v, int i, dly_t d);
    dvec_t r;
    r   = v;
    r.g = at_set(r.g, i, int'(d.dg));
    r.p = at_set(r.p, i, int'(d.dp));
    return r;
  endfunction

  function automatic dly_t carry_dly(at_vec_t t, int n, int gamma);
    at_vec_t tn;
    tn = normalize(t, n, gamma);
    return tree_delay(tn, t, n, root_k(t, n, gamma), leaves(at_get(tn, 0)),
                      leaves(at_get(tn, n - 1)));
  endfunction

  // Delays of all outputs of prefix_graph for arrival times t. The group
  // results enter the upper recursion with the arrival time group_at()
  // gives them for both g and p, so the values are upper bounds (exact
  // except where a group's propagate is earlier than its generate).
  function automatic dvec_t graph_delay(at_vec_t t, int n, int gamma);
    dvec_t   r, zp, lp;
    at_vec_t tz;
    dly_t    d, zg;
    int      l, s0, sz;
    r = '0;
    if (n == 1) begin
      d.dg = 32'(at_get(t, 0));
      d.dp = 32'(at_get(t, 0));
      return dv_set(r, 0, d);
    end
    l  = grp_count(n);
    tz = group_at(t, n, gamma);
    zp = graph_delay(tz, l - 1, gamma);
    for (int g = 0; g < l; g++) begin
      s0 = grp_start(n, g);
      sz = grp_size(n, g);
      zg = carry_dly(t >> (s0 * TW), sz, gamma);
      lp = '0;
      if (sz > 1) lp = graph_delay(t >> (s0 * TW), sz - 1, gamma);
      for (int i = 0; i < sz - 1; i++) begin
        r = dv_set(r, s0 + i, (g == 0) ? dv_get(lp, i) : gate_dly(dv_get(lp, i), dv_get(zp, g - 1)));
      end
      r = dv_set(r, s0 + sz - 1, (g < l - 1) ? dv_get(zp, g) : gate_dly(zg, dv_get(zp, g - 1)));
    end
    return r;
  endfunction

  // Largest output delay of prefix_graph.
  function automatic int graph_max_delay(at_vec_t t, int n, int gamma);
    dvec_t v;
    int    m;
    v = graph_delay(t, n, gamma);
    m = 0;
    for (int i = 0; i < n; i++) m = imax(m, imax(at_get(v.g, i), at_get(v.p, i)));
    return m;
  endfunction

  // Number of prefix gates prefix_graph instantiates for n inputs.
  function automatic int graph_gates(int n);
    int l, sz, c, sub;
    c = 0;
    if (n > 1) begin
      l   = grp_count(n);
      sub = graph_gates(l - 1);
      c   = sub + 1;
      for (int g = 0; g < l; g++) begin
        sz  = grp_size(n, g);
        sub = (sz > 1) ? graph_gates(sz - 1) : 0;
        c   = c + (sz - 1) + sub + ((g > 0) ? sz - 1 : 0);
      end
    end
    return c;
  endfunction

endpackage
