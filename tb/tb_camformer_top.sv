// tb_camformer_top: end-to-end test of the accelerator at its default size
// (1024 keys, d_k = d_v = 64, 16x64 CAM, top-2 per tile, top-32, 8 MAC lanes).
//
// Loads 1024 random binary keys (some planted equal/near to the queries), then streams
// queries back to back with different key counts (1024 keys, plus 121 and 313 keys whose
// last tile is only partly used; 121 keys give fewer than 32 candidates), while a DRAM model serves V rows after 20 clocks with random
// request stalls and the output side is sometimes slow. For each query the expected
// attention vector is computed independently from the bits: per-key score
// 2*min(matches,63)-64, top two per tile of 16, best k overall (k = 32, or 8 or 16 on some
// queries: runtime sparsity through cfg_k), softmax with exp(s/8)
// (terms and denominator rounded to BF16 as the hardware's single BF16 accumulator does -
// small terms vanish next to a large one, which is part of the design), then
// A = sum p_i V_i in double precision; each of the 64 BF16 outputs must lie within
// 3 % of sum |p_i V_i[d]| of it. The test also counts the pipeline mechanisms and fails if
// any never happened: CAM searches, Top-32 refinements, association stalls, V-prefetch
// ownership waits, SoftMax waits for the output buffer, MAC waits for V rows, and queries
// overlapping in different stages. It reports the clocks per query.
module tb_camformer_top;
  import camformer_pkg::*;
  import bf16_ref_pkg::*;
  localparam int NK = 1024, NQ = 8;
  logic clk = 0, rst_n = 0;
  logic key_we = 0, q_valid = 0, q_ready;
  logic [9:0] key_waddr = 0;
  logic [63:0] key_wdata = 0, q_data = 0;
  logic [10:0] cfg_n_keys = 0;
  logic [5:0]  cfg_k = 0;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid, a_valid, a_ready = 0;
  logic [9:0] dram_req_addr;
  logic [127:0] dram_rsp_data;
  bf16_t [63:0] a_data;
  status_t status;
  logic [63:0] keys [NK];
  logic [63:0] qs [NQ];
  int ntl [NQ];
  int nkey [NQ];
  int topk [NQ];
  int checks = 0, failures = 0, cyc = 0;
  int n_search = 0, n_merge = 0, n_cstall = 0, n_own = 0, n_obw = 0, n_vst = 0, n_overlap = 0;
  int t_acc [NQ];
  int t_out [NQ];

  camformer_top dut (.clk, .rst_n, .key_we, .key_waddr, .key_wdata, .q_valid, .q_data,
    .cfg_n_keys, .cfg_k, .q_ready, .dram_req_valid, .dram_req_addr, .dram_req_ready, .dram_rsp_valid,
    .dram_rsp_data, .a_valid, .a_data, .a_ready, .status);

  dram_model #(.LATENCY(20), .STALLS(1)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid),
    .req_addr(dram_req_addr), .req_ready(dram_req_ready), .rsp_valid(dram_rsp_valid),
    .rsp_data(dram_rsp_data));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (status.searching)  n_search++;
    if (status.merging)    n_merge++;
    if (status.cand_stall) n_cstall++;
    if (status.own_wait)   n_own++;
    if (status.ob_wait)    n_obw++;
    if (status.v_stall)    n_vst++;
    if (status.searching && status.div_phase) n_overlap++;
  end

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int score_of(logic [63:0] k, logic [63:0] q);
    int m;
    m = 64 - $countones(k ^ q);
    if (m > 63) m = 63;
    return 2 * m - 64;
  endfunction

  // expected attention vector of query qi
  task automatic reference(int qi, output real a [64], output real mag [64]);
    int ck [$];
    int cs [$];
    int sel_k [$];
    int sel_s [$];
    real sum;
    for (int t = 0; t < ntl[qi]; t++) begin
      int i0, i1, s0, s1;
      i0 = -1; i1 = -1; s0 = -999; s1 = -999;
      for (int r = 0; r < 16; r++) begin
        int k, s;
        k = t * 16 + r;
        if (k >= nkey[qi]) continue;
        s = score_of(keys[k], qs[qi]);
        if (s > s0) begin s1 = s0; i1 = i0; s0 = s; i0 = k; end
        else if (s > s1) begin s1 = s; i1 = k; end
      end
      ck.push_back(i0); cs.push_back(s0); ck.push_back(i1); cs.push_back(s1);
    end
    for (int j = 0; j < topk[qi] && ck.size() > 0; j++) begin
      int b;
      b = 0;
      for (int i = 1; i < ck.size(); i++)
        if (cs[i] > cs[b] || (cs[i] == cs[b] && ck[i] < ck[b])) b = i;
      sel_k.push_back(ck[b]); sel_s.push_back(cs[b]);
      ck.delete(b); cs.delete(b);
    end
    // the denominator is accumulated in BF16, largest term first, as the design does
    sum = 0.0;
    foreach (sel_s[i]) sum = to_real(from_real(sum + to_real(from_real($exp(real'(sel_s[i]) / 8.0)))));
    for (int d = 0; d < 64; d++) begin a[d] = 0.0; mag[d] = 0.0; end
    foreach (sel_k[i]) begin
      real p;
      p = to_real(from_real(to_real(from_real($exp(real'(sel_s[i]) / 8.0))) / sum));
      for (int d = 0; d < 64; d++) begin
        real x;
        x = p * to_real(u_dram.vdata(sel_k[i], d));
        a[d] += x;
        mag[d] += (x < 0) ? -x : x;
      end
    end
  endtask

  initial begin
    for (int i = 0; i < NQ; i++) begin
      qs[i] = {$urandom, $urandom};
      nkey[i] = (i == 2) ? 121 : (i == 5) ? 313 : 1024;   // 8, 20 and 64 tiles
      ntl[i]  = (nkey[i] + 15) / 16;
      topk[i] = (i % 4 == 1) ? 8 : (i % 4 == 3) ? 16 : 32;   // runtime sparsity
    end
    for (int k = 0; k < NK; k++) begin
      keys[k] = {$urandom, $urandom};
      if (k % 37 == 0) keys[k] = qs[(k / 37) % NQ] ^ (64'd1 << (k % 64));   // near matches
      if (k % 101 == 0) keys[k] = qs[(k / 101) % NQ];                       // exact matches
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < NK; k++) begin
      @(negedge clk);
      key_we = 1; key_waddr = 10'(k); key_wdata = keys[k];
    end
    @(negedge clk) key_we = 0;
    fork
      // host: issue queries as soon as the association stage takes them
      for (int i = 0; i < NQ; i++) begin
        while (!q_ready) @(negedge clk);
        q_valid = 1; q_data = qs[i]; cfg_n_keys = 11'(nkey[i]); cfg_k = 6'(topk[i]);
        t_acc[i] = cyc;
        @(negedge clk) q_valid = 0;
      end
      // output side: slow for some queries
      for (int i = 0; i < NQ; i++) begin
        real a [64];
        real mag [64];
        while (!a_valid) @(negedge clk);
        t_out[i] = cyc;
        if (i == 1 || i == 3) repeat (1500) @(negedge clk);
        reference(i, a, mag);
        for (int d = 0; d < 64; d++) begin
          real g, err;
          g = to_real(a_data[d]);
          err = g - a[d];
          if (err < 0) err = -err;
          checks++;
          if (err > 0.03 * mag[d] + 1e-3) begin
            failures++;
            if (failures < 6 || d == 0) $display("query %0d, A[%0d] = %f, expected %f (mag %f)", i, d, g, a[d], mag[d]);
          end
        end
        a_ready = 1;
        @(negedge clk) a_ready = 0;
      end
    join
    for (int i = 0; i < NQ; i++)
      $display("query %0d: %0d tiles, accepted at %0d, output at %0d (%0d clocks)",
               i, ntl[i], t_acc[i], t_out[i], t_out[i] - t_acc[i]);
    $display("searches %0d, refinements %0d, association stalls %0d, V-prefetch ownership waits %0d,",
             n_search, n_merge, n_cstall, n_own);
    $display("SoftMax output-buffer waits %0d, MAC V-row waits %0d, search/divide overlap %0d",
             n_obw, n_vst, n_overlap);
    begin
      int tiles;
      tiles = 0;
      foreach (ntl[i]) tiles += ntl[i];
      checks++;
      if (n_search != tiles) begin failures++; $display("expected %0d searches", tiles); end
    end
    checks += 6;
    if (n_merge == 0)   begin failures++; $display("no refinement"); end
    if (n_cstall == 0)  begin failures++; $display("no association stall"); end
    if (n_own == 0)     begin failures++; $display("no ownership wait"); end
    if (n_obw == 0)     begin failures++; $display("no output-buffer wait"); end
    if (n_vst == 0)     begin failures++; $display("no V-row wait"); end
    if (n_overlap == 0) begin failures++; $display("no stage overlap"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
