// tb_bf16_add: checks bf16_add against the correctly rounded double-precision sum,
// on random operands of mixed signs and magnitudes, plus cancellation and zero cases.
module tb_bf16_add;
  import bf16_ref_pkg::*;
  logic [15:0] a, b, y, exp_y;
  int checks = 0, failures = 0;

  bf16_add dut (.a(a), .b(b), .y(y));

  task automatic check(logic [15:0] ta, logic [15:0] tb_);
    a = ta; b = tb_;
    #1;
    exp_y = from_real(to_real(ta) + to_real(tb_));
    if (exp_y[14:0] == 15'd0) exp_y = 16'd0;   // exact cancellation gives +0
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("add %h + %h = %h, expected %h", ta, tb_, y, exp_y);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 20000; i++) check(rand_bf16(110, 140), rand_bf16(110, 140));
    for (int i = 0; i < 2000; i++) begin
      logic [15:0] t;
      t = rand_bf16(120, 130);
      check(t, {~t[15], t[14:0]});                      // x + (-x)
      check(t, {~t[15], t[14:1], ~t[0]});               // near cancellation
      check(t, 16'h0000);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
