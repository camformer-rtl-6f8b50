// tb_bf16_mac: streams random (a, b, c) triples into bf16_mac, one per clock, and checks
// that y = round(c + round(a*b)) (two BF16 roundings) appears two clocks later with its tag.
module tb_bf16_mac;
  import bf16_ref_pkg::*;
  localparam int N = 3000;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [2:0] in_tag = 0, out_tag;
  logic [15:0] a = 0, b = 0, c = 0, y;
  logic [15:0] exp_y [N];
  int issue_cyc [N];
  int cyc = 0, nout = 0, checks = 0, failures = 0;

  bf16_mac #(.TAG_W(3)) dut (.clk, .rst_n, .in_valid, .in_tag, .a, .b, .c, .out_valid, .out_tag, .y);

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && out_valid) begin
    checks += 3;
    if (y !== exp_y[nout]) begin
      failures++;
      if (failures < 10) $display("mac %0d: %h expected %h", nout, y, exp_y[nout]);
    end
    if (out_tag !== 3'(nout)) failures++;
    if (cyc - issue_cyc[nout] != 2) failures++;
    nout++;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < N; i++) begin
      logic [15:0] p;
      @(negedge clk);
      in_valid = 1; in_tag = 3'(i);
      a = rand_bf16(120, 127); b = rand_bf16(115, 135); c = rand_bf16(110, 135);
      p = from_real(to_real(a) * to_real(b));
      exp_y[i] = from_real(to_real(p) + to_real(c));
      if (exp_y[i][14:0] == 15'd0) exp_y[i] = 16'd0;
      issue_cyc[i] = cyc;
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (nout != N) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
