// tb_fixed_scaler: applies every 6-bit code to every row and checks s = 2 * code - 64,
// including the end points -64 (no match) and +62 (code 63).
module tb_fixed_scaler;
  logic [15:0][5:0] code;
  logic signed [15:0][7:0] score;
  int checks = 0, failures = 0;

  fixed_scaler #(.CAM_H(16), .BITS(6), .CAM_W(64)) dut (.code, .score);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 64; t++) begin
      for (int r = 0; r < 16; r++) code[r] = 6'((t + 7 * r) % 64);
      #1;
      for (int r = 0; r < 16; r++) begin
        checks++;
        if (int'($signed(score[r])) != 2 * ((t + 7 * r) % 64) - 64) begin
          failures++;
          $display("code %0d -> %0d", code[r], score[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
