// tb_softmax_engine: gives the SoftMax engine lists of 32 candidates (all valid, or with
// invalid tail entries) and captures what it writes to the output buffer. Checks each
// probability against exp(s_i/8) / sum_j exp(s_j/8) (relative error below 3 %), zero for
// invalid entries, the slots, that the probabilities sum to 1 within 3 %, that the divide
// phase lasts exactly 31 + t_div = 43 clocks from the first division issued to the last
// quotient written, and that the engine waits while the output buffer is still full.
module tb_softmax_engine;
  import camformer_pkg::*;
  import bf16_ref_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_ready;
  cand_t [31:0] in_cand = '0;
  logic ob_full = 0, ob_wr_en, ob_wr_valid, ob_commit, ob_wait, div_phase;
  logic [4:0] ob_wr_idx;
  logic [15:0] ob_wr_prob;
  logic [6:0] ob_wr_slot;
  logic [15:0] got_p [32];
  logic [6:0]  got_s [32];
  logic        got_v [32];
  int nwr, cyc = 0, first_div, last_wr, waits = 0;
  int checks = 0, failures = 0;

  softmax_engine #(.K(32)) dut (.clk, .rst_n, .in_valid, .in_cand, .in_ready, .ob_full,
    .ob_wr_en, .ob_wr_idx, .ob_wr_prob, .ob_wr_slot, .ob_wr_valid, .ob_commit, .ob_wait, .div_phase);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (ob_wait) waits++;
  always @(posedge clk) if (ob_wr_en) begin
    got_p[ob_wr_idx] <= ob_wr_prob; got_s[ob_wr_idx] <= ob_wr_slot; got_v[ob_wr_idx] <= ob_wr_valid;
    nwr <= nwr + 1; last_wr <= cyc;
  end
  always @(posedge clk) if (div_phase && first_div < 0) first_div <= cyc;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      real e [32];
      real sum, psum;
      int nvalid;
      nvalid = (t % 4 == 3) ? 1 + $urandom_range(30) : 32;
      @(negedge clk);
      for (int i = 0; i < 32; i++) begin
        in_cand[i].valid = (i < nvalid);
        in_cand[i].score = 8'(2 * int'($urandom_range(63)) - 64);
        in_cand[i].kidx  = 10'($urandom);
        in_cand[i].slot  = 7'($urandom);
      end
      ob_full = (t % 5 == 1);          // previous query still in the buffer
      in_valid = 1;
      nwr = 0; first_div = -1;
      @(negedge clk) in_valid = 0;
      if (ob_full) begin
        repeat (60) @(negedge clk);
        checks++;
        if (nwr != 0) failures++;       // nothing written while full
        ob_full = 0;
      end
      while (!ob_commit) @(negedge clk);
      sum = 0.0;
      for (int i = 0; i < nvalid; i++) begin
        e[i] = $exp(real'(int'(in_cand[i].score)) / 8.0);
        sum += e[i];
      end
      psum = 0.0;
      for (int i = 0; i < 32; i++) begin
        real p, ep;
        p  = to_real(got_p[i]);
        ep = (i < nvalid) ? e[i] / sum : 0.0;
        psum += p;
        checks++;
        if ((ep == 0.0 && p != 0.0) || (ep != 0.0 && (p - ep > 0.03 * ep || ep - p > 0.03 * ep)) ||
            got_s[i] !== in_cand[i].slot || got_v[i] !== in_cand[i].valid) begin
          failures++;
          if (failures < 6) $display("t=%0d i=%0d p=%f expected %f", t, i, p, ep);
        end
      end
      checks += 2;
      if (psum < 0.97 || psum > 1.03) begin failures++; $display("sum %f", psum); end
      if (last_wr - first_div != 31 + 12) begin
        failures++; $display("divide phase %0d clocks", last_wr - first_div);
      end
      @(negedge clk);
    end
    checks++;
    if (waits == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
