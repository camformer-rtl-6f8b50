// tb_sar_adc: converts every matchline level 0..64 (of 64 cells) and checks the 6-bit code
// floor(64 * m / 64) saturated at 63, the 7-clock start-to-done time and the busy flag.
// A second instance with a 48-cell row checks the scaling floor(64 * m / 48).
module tb_sar_adc;
  logic clk = 0, rst_n = 0, start = 0, start2 = 0;
  logic [6:0] lvl = 0;
  logic [5:0] lvl2 = 0;
  logic busy, done, busy2, done2;
  logic [5:0] code, code2;
  int checks = 0, failures = 0;

  sar_adc #(.BITS(6), .CAM_W(64)) dut  (.clk, .rst_n, .start, .ml_level(lvl), .busy, .done, .code);
  sar_adc #(.BITS(6), .CAM_W(48)) dut2 (.clk, .rst_n, .start(start2), .ml_level(lvl2),
                                        .busy(busy2), .done(done2), .code(code2));

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m <= 64; m++) begin
      int n, e;
      @(negedge clk) start = 1; lvl = 7'(m);
      @(negedge clk) start = 0; lvl = 7'($urandom);   // level may change after sampling
      n = 1;
      while (!done && n < 20) begin
        checks++;
        if (!busy) failures++;
        @(negedge clk); n++;
      end
      e = (m > 63) ? 63 : m;
      checks += 2;
      if (n != 7) begin failures++; $display("m=%0d: %0d clocks", m, n); end
      if (int'(code) != e) begin failures++; $display("m=%0d: code %0d expected %0d", m, code, e); end
    end
    for (int m = 0; m <= 48; m++) begin
      int e;
      @(negedge clk) start2 = 1; lvl2 = 6'(m);
      @(negedge clk) start2 = 0;
      while (!done2) @(negedge clk);
      e = (m * 64) / 48;
      if (e > 63) e = 63;
      checks++;
      if (int'(code2) != e) begin failures++; $display("W48 m=%0d: code %0d expected %0d", m, code2, e); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
