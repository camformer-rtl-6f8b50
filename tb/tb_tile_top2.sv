// tb_tile_top2: feeds random tiles of 16 scores (with ties) and checks that the two
// registered winners, one clock later, carry the right scores, global key indices
// (tile_base + row, lower index on ties), slots (slot_base, slot_base + 1) and valid.
module tb_tile_top2;
  import camformer_pkg::*;
  import cand_ref_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [15:0][7:0] score = '0;
  logic [9:0]  tile_base = 0;
  logic [10:0] n_keys = 11'd1024;
  logic [6:0]  slot_base = 0;
  cand_t [1:0] out;
  int checks = 0, failures = 0;

  tile_top2 #(.CAM_H(16), .K(2)) dut (.clk, .rst_n, .in_valid, .score, .tile_base, .n_keys,
    .slot_base, .out_valid, .out);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 1000; t++) begin
      cand_q_t q, ref_q;
      cand_t c;
      int rng;
      rng = (t % 2) ? 3 : 32;
      @(negedge clk);
      in_valid = 1;
      tile_base = 10'($urandom_range(63) * 16);
      slot_base = 7'($urandom_range(63) * 2);
      n_keys = (t % 7 == 0) ? 11'(int'(tile_base) + 5) : 11'd1024;
      q = {};
      for (int r = 0; r < 16; r++) begin
        score[r] = 8'(2 * (int'($urandom_range(2 * rng)) - rng));
        c = '0;
        c.valid = (int'(tile_base) + r) < int'(n_keys);
        c.score = score[r];
        c.kidx  = tile_base + 10'(r);
        q.push_back(c);
      end
      ref_q = best_k(q, 2);
      @(negedge clk);
      in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < 2; i++) begin
        checks++;
        if (out[i].valid !== ref_q[i].valid || out[i].score !== ref_q[i].score ||
            out[i].kidx !== ref_q[i].kidx || out[i].slot !== slot_base + 7'(i)) begin
          failures++;
          if (failures < 5) $display("t=%0d #%0d: %p expected %p", t, i, out[i], ref_q[i]);
        end
      end
      @(negedge clk);
      checks++;
      if (out_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
