// tb_query_buffer: loads random queries (DK = 128, two 64-bit segments, to exercise
// vertical tiling) and checks that each segment is presented and held until the next load.
module tb_query_buffer;
  localparam int DK = 128, W = 64;
  logic clk = 0, rst_n = 0, load = 0;
  logic [DK-1:0] q_in = 0, model = 0;
  logic seg = 0;
  logic [W-1:0] q_seg;
  int checks = 0, failures = 0;

  query_buffer #(.DK(DK), .CAM_W(W)) dut (.clk, .rst_n, .load, .q_in, .seg, .q_seg);

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
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      load = ($urandom_range(2) == 0);
      q_in = {$urandom, $urandom, $urandom, $urandom};
      @(posedge clk);
      if (load) model = q_in;
      #1 load = 0;
      for (int s = 0; s < 2; s++) begin
        seg = 1'(s);
        #1;
        checks++;
        if (q_seg !== model[s*W +: W]) begin
          failures++;
          $display("seg %0d: %h expected %h", s, q_seg, model[s*W +: W]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
