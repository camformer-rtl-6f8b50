// tb_score_accum: runs random groups of 1..4 partial-score vectors through the
// accumulation register (10-bit accumulator) and checks the signed sums, and that the
// register holds its value while `en` is low.
module tb_score_accum;
  logic clk = 0, rst_n = 0, en = 0, first = 0;
  logic signed [15:0][7:0] din = 0;
  logic signed [15:0][9:0] acc;
  int model [16];
  int checks = 0, failures = 0;

  score_accum #(.CAM_H(16), .IN_W(8), .ACC_W(10)) dut (.clk, .rst_n, .en, .first, .din, .acc);

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
    for (int g = 0; g < 300; g++) begin
      int n;
      n = 1 + $urandom_range(3);
      for (int s = 0; s < n; s++) begin
        @(negedge clk);
        en = 1; first = (s == 0);
        for (int r = 0; r < 16; r++) begin
          int v;
          v = 2 * int'($urandom_range(63)) - 64;
          din[r] = 8'(v);
          model[r] = (s == 0) ? v : model[r] + v;
        end
      end
      @(negedge clk) en = 0; din = '1;
      @(negedge clk);
      for (int r = 0; r < 16; r++) begin
        checks++;
        if (int'($signed(acc[r])) != model[r]) begin
          failures++;
          if (failures < 5) $display("row %0d: %0d expected %0d", r, $signed(acc[r]), model[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
