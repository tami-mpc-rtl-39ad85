// polymult_pkg: the exponent-matrix description of the tree-merge polynomial
// and the elaboration-time functions that turn it into the term sequence and
// the randomness addresses of the one-round polynomial multiplication.
//
// The polynomial is  F = sum_i prod_j (x_j xor y_j)^E[i][j]  over GF(2).
// On bits an exponent above zero does not change the factor, so row i only
// depends on its active set A_i = { j : E[i][j] > 0 }. Expanding
// prod_{j in A_i} (t_j xor r_j), with t_j = lt_j xor r_j public after the
// exchange, gives one term per subset S of A_i: (prod_{j in S} r_j) *
// (prod_{j in A_i \ S} t_j). S = {} is the public term, added by party 1
// only; every other S needs a share of the subset product r_S.
//
// Reuse: a subset product needed by several rows is generated and stored
// once. The used subsets are exactly the non-empty subsets of some A_i, and
// their number equals the inclusion-exclusion count N_final of the paper
// (13 for its m = 3, n = 4 example). This design stores them at compact
// addresses ranked by the subset's bit mask (smallest mask first); the
// randomness source must deliver the shares in that order.
package polymult_pkg;

  localparam int unsigned MAX_ROWS = 8;    // largest m this package handles
  localparam int unsigned MAX_VARS = 16;   // largest n this package handles
  localparam int unsigned EW       = 4;    // bits of one exponent

  typedef logic [MAX_ROWS-1:0][MAX_VARS-1:0][EW-1:0] exp_mat_t;
  typedef logic [MAX_VARS-1:0] vmask_t;

  // Default: one row holding all n = 8 leaf results, prod_j lt_j.
  function automatic exp_mat_t product_matrix(input int n);
    exp_mat_t e;
    e = '0;
    for (int j = 0; j < n; j++) e[0][j] = EW'(1);
    return e;
  endfunction

  function automatic vmask_t active_set(input exp_mat_t e, input int i, input int n);
    vmask_t a;
    a = '0;
    for (int j = 0; j < n; j++) a[j] = (e[i][j] != '0);
    return a;
  endfunction

  function automatic int popcnt(input vmask_t v);
    int c;
    c = 0;
    for (int j = 0; j < MAX_VARS; j++) c += int'(v[j]);
    return c;
  endfunction

  // Subset s (non-empty) is needed by at least one row.
  function automatic bit is_used(input exp_mat_t e, input int m, input int n, input vmask_t s);
    bit u;
    u = 1'b0;
    if (s != '0)
      for (int i = 0; i < m; i++)
        if ((s & ~active_set(e, i, n)) == '0) u = 1'b1;
    return u;
  endfunction

  // N_final: distinct subset-product shares to generate per comparison.
  function automatic int num_rand(input exp_mat_t e, input int m, input int n);
    int c;
    c = 0;
    for (int s = 1; s < (1 << n); s++) c += int'(is_used(e, m, n, vmask_t'(s)));
    return c;
  endfunction

  // N_opt: shares needed without reuse, sum_i (2^|A_i| - 1).
  function automatic int num_rand_noreuse(input exp_mat_t e, input int m, input int n);
    int c;
    c = 0;
    for (int i = 0; i < m; i++) c += (1 << popcnt(active_set(e, i, n))) - 1;
    return c;
  endfunction

  // Address of the share of subset s: its rank among the used subsets.
  function automatic int rand_addr(input exp_mat_t e, input int m, input int n, input vmask_t s);
    int c;
    c = 0;
    for (int q = 1; q < (1 << n); q++)
      if (vmask_t'(q) < s) c += int'(is_used(e, m, n, vmask_t'(q)));
    return c;
  endfunction

  // Terms evaluated per comparison: sum_i 2^|A_i| (public terms included).
  function automatic int num_terms(input exp_mat_t e, input int m, input int n);
    int c;
    c = 0;
    for (int i = 0; i < m; i++) c += 1 << popcnt(active_set(e, i, n));
    return c;
  endfunction

  typedef struct packed {
    vmask_t a;   // active set of the term's row
    vmask_t s;   // subset S of a whose share the term uses
  } term_t;

  // Term t: row i, then the subsets of A_i in increasing mask order.
  function automatic term_t term_of(input exp_mat_t e, input int m, input int n, input int t);
    int k;
    term_t r;
    k = t;
    r = '0;
    for (int i = 0; i < m; i++) begin
      vmask_t ai;
      ai = active_set(e, i, n);
      for (int q = 0; q < (1 << n); q++) begin
        if ((vmask_t'(q) & ~ai) == '0) begin
          if (k == 0) begin r.s = vmask_t'(q); r.a = ai; end
          k--;
        end
      end
    end
    return r;
  endfunction

endpackage
