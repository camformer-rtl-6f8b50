// cand_ref_pkg: reference ranking for the testbenches.
//
// best_k() returns the k best candidates of a list by plain selection sort, using the
// design's ordering (valid first, then higher score, then lower key index); positions
// past the end of the list are filled with invalid (all-zero) candidates.
package cand_ref_pkg;
  import camformer_pkg::*;

  typedef cand_t cand_q_t [$];

  function automatic bit better(cand_t x, cand_t y);
    if (x.valid != y.valid) return x.valid;
    if (x.score != y.score) return x.score > y.score;
    return x.kidx < y.kidx;
  endfunction

  function automatic cand_q_t best_k(cand_q_t in, int k);
    cand_q_t w, out;
    w = in;
    for (int i = 0; i < k; i++) begin
      int bi;
      if (w.size() == 0) begin out.push_back('0); continue; end
      bi = 0;
      for (int j = 1; j < w.size(); j++) if (better(w[j], w[bi])) bi = j;
      out.push_back(w[bi]);
      w.delete(bi);
    end
    return out;
  endfunction
endpackage
