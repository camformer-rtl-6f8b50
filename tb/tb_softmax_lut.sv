// tb_softmax_lut: reads all 256 entries and checks each against exp(x / 8), x the
// two's-complement address, rounded to BF16, with the one-clock read latency.
module tb_softmax_lut;
  import bf16_ref_pkg::*;
  logic clk = 0;
  logic [7:0] addr = 0;
  logic [15:0] data;
  int checks = 0, failures = 0;

  softmax_lut #(.DEPTH(256)) dut (.clk, .addr, .data);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 256; a++) begin
      int x;
      logic [15:0] e;
      @(negedge clk) addr = 8'(a);
      @(negedge clk);
      x = (a < 128) ? a : a - 256;
      e = from_real($exp(real'(x) / 8.0));
      checks++;
      if (data !== e) begin
        failures++;
        if (failures < 5) $display("x=%0d: %h expected %h", x, data, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
