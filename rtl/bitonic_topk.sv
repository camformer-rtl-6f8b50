// bitonic_topk: bitonic sorting network returning the K best of N candidates.
//
// A full bitonic sorter (log2(N)*(log2(N)+1)/2 levels of N/2 compare-exchange elements)
// orders the N input candidates by camformer_pkg::cand_key - valid entries first, then
// higher score, then lower key index - and the first K outputs are the K best in
// descending order. Default N = 64, K = 32 is the paper's Top-32 unit (a 64-input module
// refined across batches); tile_top2 reuses it with N = 16, K = 2. Changing K changes the
// sparsity without touching the network. Combinational; N must be a power of two.
module bitonic_topk
  import camformer_pkg::*;
#(
  parameter int unsigned N = 64,
  parameter int unsigned K = 32
) (
  input  cand_t [N-1:0] din,
  output cand_t [K-1:0] dout
);
  cand_t v [N];

  always_comb begin
    cand_t t;
    int    l;
    t = '0;
    l = 0;
    for (int i = 0; i < N; i++) v[i] = din[i];
    // Standard bitonic network, sorting to descending key order.
    for (int k = 2; k <= N; k = k * 2) begin
      for (int j = k / 2; j > 0; j = j / 2) begin
        for (int i = 0; i < N; i++) begin
          l = i ^ j;
          if (l > i) begin
            if (((i & k) == 0) ? (cand_key(v[i]) < cand_key(v[l]))
                               : (cand_key(v[i]) > cand_key(v[l]))) begin
              t = v[i]; v[i] = v[l]; v[l] = t;
            end
          end
        end
      end
    end
    for (int i = 0; i < K; i++) dout[i] = v[i];
  end

  initial begin
    assert ((N & (N - 1)) == 0 && K <= N) else $error("bitonic_topk: N must be a power of two and K <= N");
  end
endmodule
