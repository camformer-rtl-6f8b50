// tb_association_stage: runs assoc_check on the paper's configuration (1024 keys,
// d_k = 64, one CAM segment) and on a vertically tiled one (256 keys, d_k = 128, two
// segments accumulated), and requires that the association stage stalled on a slow
// consumer at least once.
module tb_association_stage;
  logic clk = 0;
  int c0, f0, s0, c1, f1, s1;
  bit d0, d1;
  int checks, failures;

  always #5 clk = ~clk;

  assoc_check #(.N_KEYS(1024), .DK(64),  .NQ(4)) u_a (.clk, .checks(c0), .failures(f0), .stalls(s0), .finished(d0));
  assoc_check #(.N_KEYS(256),  .DK(128), .NQ(4)) u_b (.clk, .checks(c1), .failures(f1), .stalls(s1), .finished(d1));

  initial begin
    repeat (400000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, f0 + f1 + 1);
    $finish;
  end

  initial begin
    wait (d0 && d1);
    checks = c0 + c1 + 1;
    failures = f0 + f1;
    if (s0 + s1 == 0) begin failures++; $display("no stall seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
