// svm_ref_pkg: reference model of a one-vs-rest linear SVM for testbenches.
//
// Recomputes, in plain integer arithmetic, the score of every class of a
// model whose coefficients come from svm_pkg::gen_coef (the same layout the
// RTL uses: weight i of class k is coefficient k*m+i, the bias of class k is
// coefficient n*m+k) and returns the first class with the highest score.
package svm_ref_pkg;

  function automatic int ref_score(int unsigned seed, int unsigned n, int unsigned m,
                                   int unsigned wb, int unsigned bb, int k, int x[]);
    int s;
    s = svm_pkg::gen_coef(seed, n * m + k, bb);
    for (int i = 0; i < int'(m); i++)
      s += svm_pkg::gen_coef(seed, k * m + i, wb) * x[i];
    return s;
  endfunction

  function automatic int ref_class(int unsigned seed, int unsigned n, int unsigned m,
                                   int unsigned wb, int unsigned bb, int x[]);
    int best, best_k, s;
    best_k = 0;
    best = ref_score(seed, n, m, wb, bb, 0, x);
    for (int k = 1; k < int'(n); k++) begin
      s = ref_score(seed, n, m, wb, bb, k, x);
      if (s > best) begin
        best = s;
        best_k = k;
      end
    end
    return best_k;
  endfunction

endpackage
