// tb_ptop_reg: streams the stage-1 winners of whole queries (2 per tile, 64 tiles for
// n = 1024 and shorter queries) into the PTop register, with random gaps and a SoftMax side
// that is sometimes slow to take the result. Checks that the final 32 equal the best 32 of
// all candidates of that query, that a 1024-key query triggers exactly 3 refinements (after
// tiles 32, 48 and 64), and that a slow consumer stalls the input. Queries use random
// runtime k (in_k): only the best k of the final list may be marked valid.
module tb_ptop_reg;
  import camformer_pkg::*;
  import cand_ref_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_last = 0, in_ready, out_valid, out_ready = 0, merging;
  cand_t [1:0]  in_cand = '0;
  logic [5:0]   in_k = 6'd32;
  cand_t [31:0] out;
  int checks = 0, failures = 0, merges = 0, stalls = 0;
  cand_q_t expq [$];
  int exp_merges [$];

  ptop_reg #(.ENTRIES(64), .K_OUT(32), .K_IN(2)) dut (.clk, .rst_n, .in_valid, .in_last, .in_k,
    .in_cand, .in_ready, .out_valid, .out, .out_ready, .merging);

  always #5 clk = ~clk;
  always @(posedge clk) if (merging) merges++;
  always @(posedge clk) if (in_valid && !in_ready) stalls++;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // consumer
  initial begin
    int qn;
    qn = 0;
    forever begin
      @(negedge clk);
      out_ready = (qn % 3 == 2) ? ($urandom_range(20) == 0) : 1'b1;
      if (out_valid && out_ready) begin
        cand_q_t e;
        e = expq.pop_front();
        for (int i = 0; i < 32; i++) begin
          checks++;
          if (out[i].valid !== e[i].valid ||
              (e[i].valid && (out[i].score !== e[i].score || out[i].kidx !== e[i].kidx || out[i].slot !== e[i].slot))) begin
            failures++;
            if (failures < 5) $display("q%0d #%0d: %p expected %p", qn, i, out[i], e[i]);
          end
        end
        qn++;
      end
    end
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int qi = 0; qi < 12; qi++) begin
      cand_q_t all;
      int nt, m0, k;
      cand_q_t e;
      nt = (qi % 2 == 0) ? 64 : 1 + $urandom_range(63);
      m0 = merges;
      k = (qi % 3 == 0) ? 32 : 1 + $urandom_range(31);
      in_k = 6'(k);
      all = {};
      for (int t = 0; t < nt; t++) begin
        @(negedge clk);
        while ($urandom_range(3) == 0) begin in_valid = 0; @(negedge clk); end
        in_valid = 1; in_last = (t == nt - 1);
        for (int i = 0; i < 2; i++) begin
          in_cand[i].valid = 1;
          in_cand[i].score = 8'(2 * int'($urandom_range(62)) - 64);
          in_cand[i].kidx  = 10'(t * 16 + $urandom_range(15));
          in_cand[i].slot  = 7'(2 * t + i);
          all.push_back(in_cand[i]);
        end
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (t == 0) m0 = merges;   // the previous query's final refinement is over
      end
      @(negedge clk) in_valid = 0; in_last = 0;
      e = best_k(all, 32);
      for (int i = k; i < e.size(); i++) e[i].valid = 1'b0;
      expq.push_back(e);
      repeat (3) @(posedge clk);
      if (nt == 64) begin
        checks++;
        if (merges - m0 != 3) begin failures++; $display("q%0d: %0d refinements", qi, merges - m0); end
      end
    end
    repeat (3000) @(posedge clk);
    checks += 2;
    if (expq.size() != 0) begin failures++; $display("%0d results missing", expq.size()); end
    if (stalls == 0) begin failures++; $display("no input stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
