// pml_pkg: widths, types and elaboration-time functions shared by the bespoke
// printed ML circuits.
//
// Bespoke circuits hard-wire every trained coefficient as a constant, so the
// arithmetic is built from constant ("bespoke") multipliers. This package holds:
//   * the fixed-point widths (4-bit unsigned inputs, 8-bit signed coefficients,
//     both from the published design),
//   * bm_cost(): an area proxy for a bespoke multiplier by constant w,
//   * approx_coeffs(): the hardware-driven coefficient approximation. For each
//     coefficient w it keeps two candidates, the cheapest value in [w, w+e]
//     (negative error) and the cheapest in [w-e, w] (positive error), both
//     clipped to the 8-bit range; then it picks one candidate per coefficient so
//     that |sum(w - w~)| is minimal and, among those, the total cost is minimal.
//     The published flow does that pick by brute force; here an exact dynamic
//     programme over the running error gives the same optimum in N*range steps.
//   * placeholder_coef(): a deterministic pseudo-random coefficient generator.
//     The trained coefficients of the evaluated models are not published, so
//     the default circuits use these values; replace them by a trained model.
//
// Own choices: the area proxy (the published flow synthesizes every BM_w with
// the printed cell library instead), the tie rule inside a candidate window
// (closest to w wins) and the final tie rule (first optimum found).
// Nothing here is hardware on its own: all functions run at elaboration.
package pml_pkg;

  localparam int X_W   = 4;   // input precision (unsigned, normalised to [0,1))
  localparam int W_W   = 8;   // coefficient precision (signed)
  localparam int MAX_N = 32;  // largest fan-in of one weighted sum handled by approx_coeffs
  localparam int MAX_E = 8;   // largest approximation window handled by approx_coeffs

  typedef logic signed [W_W-1:0] coef_t;
  typedef logic [MAX_N*W_W-1:0]  coef_vec_t;   // coefficient i in bits [i*W_W +: W_W]

  localparam int W_MIN = -(1 << (W_W - 1));
  localparam int W_MAX = (1 << (W_W - 1)) - 1;

  // Number of non-zero digits of the canonical signed-digit form of v >= 0.
  function automatic int csd_digits(input int v);
    int n;
    int r;
    n = 0;
    r = v;
    while (r != 0) begin
      if ((r & 1) != 0) begin
        n++;
        // digit +1 if r mod 4 == 1, digit -1 if r mod 4 == 3
        if ((r & 3) == 3) r = r + 1;
        else              r = r - 1;
      end
      r = r >>> 1;
    end
    return n;
  endfunction

  // Area proxy of the bespoke multiplier by constant w: one adder per extra
  // CSD digit, one negation when w < 0. Zero and positive powers of two cost 0.
  function automatic int bm_cost(input int w);
    int a;
    a = (w < 0) ? -w : w;
    if (w == 0) return 0;
    return (csd_digits(a) - 1) + ((w < 0) ? 1 : 0);
  endfunction

  function automatic int clip_w(input int w);
    if (w < W_MIN) return W_MIN;
    if (w > W_MAX) return W_MAX;
    return w;
  endfunction

  // Cheapest value in [lo, hi]; ties go to the value closest to w.
  function automatic int cheapest(input int w, input int lo, input int hi);
    int best;
    int bc;
    int bd;
    int c;
    int d;
    best = w;
    bc   = bm_cost(w);
    bd   = 0;
    for (int v = lo; v <= hi; v++) begin
      c = bm_cost(v);
      d = (v > w) ? v - w : w - v;
      if (c < bc || (c == bc && d < bd)) begin
        best = v;
        bc   = c;
        bd   = d;
      end
    end
    return best;
  endfunction

  function automatic coef_t get_coef(input coef_vec_t v, input int i);
    return coef_t'(v[i*W_W +: W_W]);
  endfunction

  // Candidate w~- (cheapest in [w, w+e]) and w~+ (cheapest in [w-e, w]).
  function automatic int cand_neg(input int w, input int e);
    return cheapest(w, w, clip_w(w + e));
  endfunction

  function automatic int cand_pos(input int w, input int e);
    return cheapest(w, clip_w(w - e), w);
  endfunction

  // Hardware-driven coefficient approximation of one weighted sum with n
  // coefficients and window e (n <= MAX_N, e <= MAX_E). Dynamic programme over
  // the running error k (offset by OFF): row cost holds the cheapest total cost
  // that reaches each error after i coefficients; pick records which candidate
  // did, for the walk back. Rows are packed vectors of 8-bit costs (all
  // reachable costs stay below 8'hff, which marks an unreachable state).
  function automatic coef_vec_t approx_coeffs(input coef_vec_t w, input int n, input int e);
    localparam int OFF = MAX_N * MAX_E;
    localparam int NS  = 2 * OFF + 1;
    localparam logic [7:0] INF = 8'hff;
    logic [NS*8-1:0]    cur;
    logic [NS*8-1:0]    nxt;
    logic [MAX_N*NS-1:0] pick;   // bit i*NS+k: took w~+ to reach k after i+1 coefficients
    int        cn    [MAX_N];
    int        cp    [MAX_N];
    int        en    [MAX_N];
    int        ep    [MAX_N];
    int        lo;
    int        hi;
    int        s;
    int        c;
    int        best_s;
    int        best_c;
    int        best_a;
    int        a;
    coef_vec_t res;
    res  = w;
    // pick needs no clearing: the walk back reads only bits written on the way.
    for (int i = 0; i < n; i++) begin
      cn[i] = cand_neg(int'(get_coef(w, i)), e);
      cp[i] = cand_pos(int'(get_coef(w, i)), e);
      en[i] = int'(get_coef(w, i)) - cn[i];   // <= 0
      ep[i] = int'(get_coef(w, i)) - cp[i];   // >= 0
    end
    cur = '1;
    cur[OFF*8 +: 8] = 8'd0;
    lo = OFF;
    hi = OFF;
    for (int i = 0; i < n; i++) begin
      nxt = '1;
      for (int k = lo; k <= hi; k++) begin
        if (cur[k*8 +: 8] != INF) begin
          s = k + en[i];
          c = int'(cur[k*8 +: 8]) + bm_cost(cn[i]);
          if (c < int'(nxt[s*8 +: 8])) begin
            nxt[s*8 +: 8] = 8'(c);
            pick[i*NS + s] = 1'b0;
          end
          s = k + ep[i];
          c = int'(cur[k*8 +: 8]) + bm_cost(cp[i]);
          if (c < int'(nxt[s*8 +: 8])) begin
            nxt[s*8 +: 8] = 8'(c);
            pick[i*NS + s] = 1'b1;
          end
        end
      end
      cur = nxt;
      lo  = lo + en[i];
      hi  = hi + ep[i];
    end
    best_s = OFF;
    best_c = 256;
    best_a = NS;
    for (int k = lo; k <= hi; k++) begin
      if (cur[k*8 +: 8] != INF) begin
        a = (k > OFF) ? k - OFF : OFF - k;
        if (a < best_a || (a == best_a && int'(cur[k*8 +: 8]) < best_c)) begin
          best_a = a;
          best_c = int'(cur[k*8 +: 8]);
          best_s = k;
        end
      end
    end
    s = best_s;
    for (int i = n - 1; i >= 0; i--) begin
      if (pick[i*NS + s]) begin
        res[i*W_W +: W_W] = W_W'(cp[i]);
        s = s - ep[i];
      end else begin
        res[i*W_W +: W_W] = W_W'(cn[i]);
        s = s - en[i];
      end
    end
    return res;
  endfunction

  // Deterministic stand-in for a trained coefficient: a hash of (seed, index)
  // folded to the 8-bit signed range.
  function automatic coef_t placeholder_coef(input int seed, input int idx);
    logic [31:0] h;
    h = 32'(seed) * 32'd2654435761 + 32'(idx) * 32'd40503 + 32'd12345;
    h = h ^ (h >> 15);
    h = h * 32'd2246822519;
    h = h ^ (h >> 13);
    return coef_t'(h[W_W-1:0]);
  endfunction

  // Vector of n placeholder coefficients.
  function automatic coef_vec_t placeholder_vec(input int seed, input int n);
    coef_vec_t v;
    v = '0;
    for (int i = 0; i < n; i++) v[i*W_W +: W_W] = placeholder_coef(seed, i);
    return v;
  endfunction

endpackage
