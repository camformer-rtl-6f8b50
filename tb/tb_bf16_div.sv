// tb_bf16_div: streams one division per clock into bf16_div and checks each quotient
// against the double-precision quotient rounded to BF16, its tag, and that every result
// appears exactly 12 clocks (the divider latency) after its operands.
module tb_bf16_div;
  import bf16_ref_pkg::*;
  localparam int LAT = 12;
  localparam int N = 3000;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, out_valid;
  logic [4:0] in_tag = 0, out_tag;
  logic [15:0] a = 0, b = 0, y;
  logic [15:0] ea [N];
  logic [15:0] eb [N];
  int issue_cyc [N];
  int cyc = 0, nout = 0, checks = 0, failures = 0;

  bf16_div #(.TAG_W(5)) dut (.clk, .rst_n, .in_valid, .in_tag, .a, .b, .out_valid, .out_tag, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    logic [15:0] e;
    e = from_real(to_real(ea[nout]) / to_real(eb[nout]));
    checks += 3;
    if (y !== e) begin
      failures++;
      if (failures < 10) $display("div %h / %h = %h, expected %h", ea[nout], eb[nout], y, e);
    end
    if (out_tag !== 5'(nout)) failures++;
    if (cyc - issue_cyc[nout] != LAT) begin
      failures++;
      if (failures < 10) $display("latency %0d", cyc - issue_cyc[nout]);
    end
    nout++;
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      ea[i] = rand_bf16(100, 150);
      eb[i] = rand_bf16(100, 150);
    end
    ea[0] = 16'h0000; eb[1] = 16'h0000; ea[2] = 16'h3f80; eb[2] = 16'h3f80;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      in_valid = 1; in_tag = 5'(i); a = ea[i]; b = eb[i];
      issue_cyc[i] = cyc;
    end
    @(negedge clk) in_valid = 0;
    repeat (LAT + 5) @(posedge clk);
    checks++;
    if (nout != N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
