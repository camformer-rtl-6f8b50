// tb_output_buffer: writes 32 random entries, commits, checks `full` and the contents,
// then releases and checks `full` drops; repeated with partial overwrites.
module tb_output_buffer;
  logic clk = 0, rst_n = 0, wr_en = 0, wr_valid = 0, commit = 0, release_i = 0, full;
  logic [4:0] wr_idx = 0;
  logic [15:0] wr_prob = 0;
  logic [6:0] wr_slot = 0;
  logic [31:0][15:0] prob;
  logic [31:0][6:0] slot;
  logic [31:0] valid;
  logic [15:0] mp [32];
  logic [6:0]  ms [32];
  logic        mv [32];
  int checks = 0, failures = 0;

  output_buffer #(.K(32)) dut (.clk, .rst_n, .wr_en, .wr_idx, .wr_prob, .wr_slot, .wr_valid,
    .commit, .release_i, .full, .prob, .slot, .valid);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < 32; i++) begin
        if (t > 0 && $urandom_range(1)) continue;
        @(negedge clk);
        wr_en = 1; wr_idx = 5'(i); wr_prob = 16'($urandom); wr_slot = 7'($urandom); wr_valid = 1'($urandom);
        mp[i] = wr_prob; ms[i] = wr_slot; mv[i] = wr_valid;
      end
      @(negedge clk) wr_en = 0; commit = 1;
      @(negedge clk) commit = 0;
      checks++;
      if (!full) failures++;
      for (int i = 0; i < 32; i++) begin
        checks++;
        if (prob[i] !== mp[i] || slot[i] !== ms[i] || valid[i] !== mv[i]) failures++;
      end
      repeat ($urandom_range(5)) @(negedge clk);
      checks++;
      if (!full) failures++;
      release_i = 1;
      @(negedge clk) release_i = 0;
      checks++;
      if (full) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
