// tb_bf16_mul: checks bf16_mul against the correctly rounded double-precision product,
// including zero operands and results that overflow to infinity or flush to zero.
module tb_bf16_mul;
  import bf16_ref_pkg::*;
  logic [15:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  bf16_mul dut (.a(a), .b(b), .y(y));

  task automatic check(logic [15:0] ta, logic [15:0] tb_);
    a = ta; b = tb_;
    #1;
    exp_y = from_real(to_real(ta) * to_real(tb_));
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("mul %h * %h = %h, expected %h", ta, tb_, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) check(rand_bf16(90, 160), rand_bf16(90, 160));
    for (int i = 0; i < 200; i++) begin
      check(rand_bf16(200, 250), rand_bf16(200, 250));  // overflow
      check(rand_bf16(1, 40), rand_bf16(1, 40));        // underflow
      check(rand_bf16(100, 150), 16'h0000);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
