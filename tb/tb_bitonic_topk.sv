// tb_bitonic_topk: drives the 64-input Top-32 network with random candidate sets (with
// invalid entries, duplicated scores and narrow score ranges to force ties) and compares
// the 32 outputs, in order, with a selection-sort reference.
module tb_bitonic_topk;
  import camformer_pkg::*;
  import cand_ref_pkg::*;
  cand_t [63:0] din;
  cand_t [31:0] dout;
  int checks = 0, failures = 0;

  bitonic_topk #(.N(64), .K(32)) dut (.din, .dout);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 500; t++) begin
      cand_q_t q, ref_q;
      int range;
      range = (t % 3 == 0) ? 4 : 127;
      q = {};
      for (int i = 0; i < 64; i++) begin
        din[i].valid = ($urandom_range(9) != 0) || (t % 5 == 0);
        din[i].score = 8'(int'($urandom_range(2 * range)) - range);
        din[i].kidx  = 10'($urandom);
        din[i].slot  = 7'(i);
        q.push_back(din[i]);
      end
      #1;
      ref_q = best_k(q, 32);
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (dout[i].valid !== ref_q[i].valid ||
            (ref_q[i].valid && (dout[i].score !== ref_q[i].score || dout[i].kidx !== ref_q[i].kidx))) begin
          failures++;
          if (failures < 5) $display("t=%0d pos %0d: %p expected %p", t, i, dout[i], ref_q[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
