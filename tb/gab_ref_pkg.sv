// gab_ref_pkg: software reference of the Gallager-B decoder, written
// directly from the algorithm (majority votes and parity checks on bits),
// with no reference to how the neuromorphic mapping computes it. It also
// predicts in which tick the decoder reports its result.
package gab_ref_pkg;

  localparam int unsigned M = 4;
  localparam int unsigned N = 8;

  // H as printed: row m, column n
  localparam bit H [M][N] = '{
    '{0, 1, 0, 1, 1, 0, 0, 1},
    '{1, 1, 1, 0, 0, 1, 0, 0},
    '{0, 0, 1, 0, 0, 1, 1, 1},
    '{1, 0, 0, 1, 1, 0, 1, 0}
  };

  typedef struct {
    bit [N-1:0] word;     // bit n = x'_n
    bit         zero;     // decoded word meets all checks
    int         tick;     // tick in which done reaches the host
    int         iter;     // iteration that converged, -1 if none
  } gab_result_t;

  function automatic bit syndrome_zero(bit [N-1:0] x);
    for (int m = 0; m < M; m++) begin
      bit p = 0;
      for (int n = 0; n < N; n++) if (H[m][n]) p ^= x[n];
      if (p) return 0;
    end
    return 1;
  endfunction

  // majority of votes and r; a tie gives r
  function automatic bit vote(int ones, int total, bit r);
    if (2 * ones > total) return 1;
    if (2 * ones < total) return 0;
    return r;
  endfunction

  // One GaB run: returns the estimate after iteration 'iters' (iteration 0
  // is the received word itself).
  function automatic bit [N-1:0] gab_estimate(bit [N-1:0] r, int iters);
    bit vc [M][N];
    bit cv [M][N];
    bit [N-1:0] x;
    x = r;
    for (int m = 0; m < M; m++) for (int n = 0; n < N; n++) vc[m][n] = r[n];
    for (int it = 1; it <= iters; it++) begin
      for (int m = 0; m < M; m++)
        for (int n = 0; n < N; n++) if (H[m][n]) begin
          bit p = 0;
          for (int t = 0; t < N; t++) if (H[m][t] && t != n) p ^= vc[m][t];
          cv[m][n] = p;
        end
      for (int n = 0; n < N; n++) begin
        int ones = r[n], tot = 1;
        for (int m = 0; m < M; m++) if (H[m][n]) begin ones += cv[m][n]; tot++; end
        x[n] = vote(ones, tot, r[n]);
        for (int m = 0; m < M; m++) if (H[m][n]) begin
          int o2 = r[n], t2 = 1;
          for (int k = 0; k < M; k++) if (H[k][n] && k != m) begin o2 += cv[k][n]; t2++; end
          vc[m][n] = vote(o2, t2, r[n]);
        end
      end
    end
    return x;
  endfunction

  // Expected host-visible result. The decision of iteration i is checked by
  // the Syndrome Core and reaches the host with done in tick 6 + 2i. The
  // iteration counter raises done without zero in tick 2*max_iter + 5; the
  // word that arrives with it is the decision of iteration max_iter - 1
  // (the decision stream of odd ticks lags the even one by one iteration).
  function automatic gab_result_t expected(bit [N-1:0] r, int max_iter);
    gab_result_t res;
    for (int i = 0; i < max_iter; i++) begin
      bit [N-1:0] x = gab_estimate(r, i);
      if (syndrome_zero(x) && 6 + 2 * i < 2 * max_iter + 5) begin
        res.word = x; res.zero = 1; res.tick = 6 + 2 * i; res.iter = i;
        return res;
      end
    end
    res.word = gab_estimate(r, max_iter - 1);
    res.zero = 0;
    res.tick = 2 * max_iter + 5;
    res.iter = -1;
    return res;
  endfunction

endpackage
