// tb_key_sram: fills all 1024 key rows with random data and reads them back in random
// order, checking the data and the one-clock read latency.
module tb_key_sram;
  localparam int N = 1024, DK = 64;
  logic clk = 0, we = 0, re = 0;
  logic [9:0] waddr = 0, raddr = 0;
  logic [DK-1:0] wdata = 0, rdata;
  logic [DK-1:0] model [N];
  int checks = 0, failures = 0;

  key_sram #(.N_KEYS(N), .DK(DK)) dut (.clk, .we, .waddr, .wdata, .re, .raddr, .rdata);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      we = 1; waddr = 10'(i); wdata = {$urandom, $urandom}; model[i] = wdata;
    end
    @(negedge clk) we = 0;
    for (int i = 0; i < 3000; i++) begin
      int k;
      k = $urandom_range(N - 1);
      @(negedge clk) re = 1; raddr = 10'(k);
      @(negedge clk) re = 0;
      checks++;
      if (rdata !== model[k]) begin
        failures++;
        if (failures < 5) $display("row %0d: %h expected %h", k, rdata, model[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
