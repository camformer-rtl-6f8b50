// assoc_check: one self-contained check of association_stage at a given (N_KEYS, DK),
// used by tb_association_stage. Loads random keys (a few equal or opposite to the query),
// runs NQ queries with varying tile counts and a consumer that sometimes refuses winners,
// and compares every winner pair with a reference computed from the bits: per key,
// m_seg = matching bits of each 64-bit segment, score = sum over segments of
// (2 * min(m_seg, 63) - 64), top two per tile (lower index on ties). Also checks the
// first/last flags, slots, and that back-to-back tiles are CAM_H + 2 = 18 clocks apart
// per segment when nothing stalls. Raises `finished` when done.
module assoc_check #(
  parameter int N_KEYS = 1024,
  parameter int DK     = 64,
  parameter int NQ     = 4
) (
  input  logic clk,
  output int   checks,
  output int   failures,
  output int   stalls,
  output bit   finished
);
  import camformer_pkg::*;
  localparam int NSEG = DK / 64;
  localparam int NT = N_KEYS / 16;
  logic rst_n = 0, key_we = 0, q_valid = 0, q_ready;
  logic [$clog2(N_KEYS)-1:0] key_waddr = 0;
  logic [DK-1:0] key_wdata = 0, q_data = 0;
  logic [$clog2(N_KEYS):0] cfg_n_keys = 0;
  logic [5:0] cfg_k = 0, cand_k;
  int ek;
  logic cand_valid, cand_first, cand_last, cand_ready = 0, cand_stall, searching;
  cand_t [1:0] cand;
  logic [DK-1:0] keys [N_KEYS];
  int cyc = 0, last_cand_cyc = -1;

  association_stage #(.N_KEYS(N_KEYS), .DK(DK), .CAM_H(16), .CAM_W(64)) dut (.clk, .rst_n,
    .key_we, .key_waddr, .key_wdata, .q_valid, .q_data, .cfg_n_keys, .cfg_k, .q_ready,
    .cand_valid, .cand_first, .cand_last, .cand_k, .cand, .cand_ready, .cand_stall, .searching);

  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (cand_stall) stalls++;

  function automatic int score_of(int k, logic [DK-1:0] q);
    int s;
    s = 0;
    for (int g = 0; g < NSEG; g++) begin
      int m;
      m = 64 - $countones(keys[k][g*64 +: 64] ^ q[g*64 +: 64]);
      if (m > 63) m = 63;
      s += 2 * m - 64;
    end
    if (s > 127) s = 127;
    if (s < -128) s = -128;
    return s;
  endfunction

  initial begin
    checks = 0; failures = 0; stalls = 0; finished = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < N_KEYS; k++) begin
      @(negedge clk);
      key_we = 1; key_waddr = ($clog2(N_KEYS))'(k);
      for (int w = 0; w < DK / 32; w++) key_wdata[w*32 +: 32] = $urandom;
      keys[k] = key_wdata;
    end
    @(negedge clk) key_we = 0;
    for (int qi = 0; qi < NQ; qi++) begin
      int nt, nk;
      bit slow;
      nt = (qi == 0) ? NT : 1 + $urandom_range(NT - 1);
      slow = (qi % 2 == 1);
      for (int w = 0; w < DK / 32; w++) q_data[w*32 +: 32] = $urandom;
      // plant exact and opposite matches
      for (int j = 0; j < 6; j++) begin
        int k;
        k = $urandom_range(N_KEYS - 1);
        keys[k] = (j % 2) ? q_data : ~q_data;
        @(negedge clk) key_we = 1; key_waddr = ($clog2(N_KEYS))'(k); key_wdata = keys[k];
        @(negedge clk) key_we = 0;
      end
      // odd queries end in a partly filled tile
      nk = (qi % 2 == 1) ? (nt - 1) * 16 + 1 + $urandom_range(15) : nt * 16;
      cfg_n_keys = ($clog2(N_KEYS)+1)'(nk);
      cfg_k = 6'($urandom_range(32));          // 0 means 32
      ek = (cfg_k == 0) ? 32 : int'(cfg_k);
      while (!q_ready) @(negedge clk);
      q_valid = 1;
      @(negedge clk) q_valid = 0;
      last_cand_cyc = -1;
      for (int t = 0; t < nt; t++) begin
        cand_t e0, e1;
        int s0, s1, i0, i1;
        cand_ready = slow ? ($urandom_range(3) == 0) : 1'b1;
        while (!(cand_valid && cand_ready)) begin
          @(negedge clk);
          cand_ready = slow ? ($urandom_range(3) == 0) : 1'b1;
        end
        // reference top-2 of tile t
        i0 = -1; i1 = -1; s0 = -999; s1 = -999;
        for (int r = 0; r < 16; r++) begin
          int k, s;
          k = t * 16 + r;
          if (k >= nk) continue;
          s = score_of(k, q_data);
          if (s > s0) begin s1 = s0; i1 = i0; s0 = s; i0 = k; end
          else if (s > s1) begin s1 = s; i1 = k; end
        end
        checks++;
        if (int'(cand[0].score) != s0 || int'(cand[0].kidx) != i0 ||
            (i1 >= 0 && (int'(cand[1].score) != s1 || int'(cand[1].kidx) != i1)) ||
            !cand[0].valid || cand[1].valid != (i1 >= 0) ||
            int'(cand[0].slot) != 2 * t || int'(cand[1].slot) != 2 * t + 1 ||
            cand_first != (t == 0) || cand_last != (t == nt - 1) ||
            (t == nt - 1 && int'(cand_k) != ek)) begin
          failures++;
          if (failures < 5) $display("DK=%0d q%0d tile %0d: got (%0d@%0d, %0d@%0d) expected (%0d@%0d, %0d@%0d)",
            DK, qi, t, cand[0].score, cand[0].kidx, cand[1].score, cand[1].kidx, s0, i0, s1, i1);
        end
        if (!slow && t > 1) begin
          checks++;
          if (cyc - last_cand_cyc != 18 * NSEG) begin
            failures++;
            if (failures < 5) $display("tile interval %0d", cyc - last_cand_cyc);
          end
        end
        last_cand_cyc = cyc;
        @(negedge clk);
        cand_ready = 0;
      end
    end
    finished = 1;
  end
endmodule
