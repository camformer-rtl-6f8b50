// tb_context_stage: fills an output buffer with 32 probabilities/slots (some entries
// invalid) and a Value SRAM model with random BF16 rows, and checks the 64 outputs against
// A[d] = sum_i p_i V[slot_i][d] computed in double precision (error within 2 % of
// sum_i |p_i V[slot_i][d]|). Rows that arrive late (or carry the previous query's tag)
// must be waited for; with all rows present, a query must take at most 32 * 8 + 8 clocks
// (8 MAC lanes, one V word per clock). Also checks the release/ctx_done pulses.
module tb_context_stage;
  import bf16_ref_pkg::*;
  logic clk = 0, rst_n = 0, ob_full = 0, ob_release, vs_re, a_valid, a_ready = 0, ctx_done, v_stall;
  logic [31:0][15:0] ob_prob = '0;
  logic [31:0][6:0]  ob_slot = '0;
  logic [31:0]       ob_valid = '0;
  logic [6:0]   vs_rslot;
  logic [2:0]   vs_rchunk;
  logic [127:0] vs_rdata;
  logic [127:0] row_written = '0, row_tag = '0;
  logic [63:0][15:0] a_data;
  logic [15:0] vmem [128][64];
  int checks = 0, failures = 0, stalls = 0, cyc = 0;

  context_stage #(.K(32), .DV(64), .LANES(8), .ROWS(128)) dut (.clk, .rst_n, .ob_full, .ob_prob,
    .ob_slot, .ob_valid, .ob_release, .vs_re, .vs_rslot, .vs_rchunk, .vs_rdata,
    .vs_row_written(row_written), .vs_row_tag(row_tag), .a_valid, .a_data, .a_ready,
    .ctx_done, .v_stall);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (v_stall) stalls++;
  always @(posedge clk) if (vs_re)
    for (int l = 0; l < 8; l++) vs_rdata[l*16 +: 16] <= vmem[vs_rslot][int'(vs_rchunk) * 8 + l];

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int q = 0; q < 12; q++) begin
      logic par;
      bit late;
      int t0, t1;
      real ref_a [64];
      real mag [64];
      par = 1'(q % 2);
      late = (q % 3 == 1);
      @(negedge clk);
      for (int s = 0; s < 128; s++) for (int d = 0; d < 64; d++) vmem[s][d] = rand_bf16(120, 128);
      for (int i = 0; i < 32; i++) begin
        ob_prob[i]  = from_real(real'($urandom_range(1000)) / 32000.0);
        ob_slot[i]  = 7'($urandom);
        ob_valid[i] = ($urandom_range(7) != 0);
      end
      for (int s = 0; s < 128; s++) begin
        row_written[s] = 1'b1;
        row_tag[s] = late && ($urandom_range(3) == 0) ? ~par : par;
      end
      for (int d = 0; d < 64; d++) begin ref_a[d] = 0.0; mag[d] = 0.0; end
      for (int i = 0; i < 32; i++) if (ob_valid[i])
        for (int d = 0; d < 64; d++) begin
          real x;
          x = to_real(ob_prob[i]) * to_real(vmem[ob_slot[i]][d]);
          ref_a[d] += x;
          mag[d] += (x < 0) ? -x : x;
        end
      ob_full = 1; t0 = cyc;
      if (late) begin
        repeat (150) @(negedge clk);
        row_tag = {128{par}};              // the missing rows arrive
      end
      while (!a_valid) @(negedge clk);
      t1 = cyc;
      repeat ($urandom_range(3)) @(negedge clk);
      checks++;
      if (!late && t1 - t0 > 32 * 8 + 8) begin failures++; $display("q%0d took %0d clocks", q, t1 - t0); end
      for (int d = 0; d < 64; d++) begin
        real g, err;
        g = to_real(a_data[d]);
        err = g - ref_a[d];
        if (err < 0) err = -err;
        checks++;
        if (err > 0.02 * mag[d] + 1e-6) begin
          failures++;
          if (failures < 5) $display("q%0d d%0d: %f expected %f", q, d, g, ref_a[d]);
        end
      end
      a_ready = 1;
      @(negedge clk) a_ready = 0;
      checks++;
      if (!ob_release || !ctx_done) failures++;
      ob_full = 0;
      @(negedge clk);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("no V stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
