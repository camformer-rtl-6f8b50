// tb_ba_cam_array: programs the 16x64 array with random keys (some rows equal or opposite
// to the query), searches, and checks every matchline level against the number of bit
// positions where key and query agree; also checks the levels are held while the array
// is reprogrammed.
module tb_ba_cam_array;
  localparam int H = 16, W = 64;
  logic clk = 0, rst_n = 0, prog = 0, search = 0, ml_valid;
  logic [3:0] prog_row = 0;
  logic [W-1:0] prog_data = 0, query = 0;
  logic [H-1:0][6:0] ml_level;
  logic [W-1:0] keys [H];
  int exp_lvl [H];
  int checks = 0, failures = 0;

  ba_cam_array #(.CAM_H(H), .CAM_W(W)) dut (.clk, .rst_n, .prog, .prog_row, .prog_data,
    .search, .query, .ml_valid, .ml_level);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      query = {$urandom, $urandom};
      for (int r = 0; r < H; r++) begin
        case ($urandom_range(5))
          0: keys[r] = query;
          1: keys[r] = ~query;
          default: keys[r] = {$urandom, $urandom} & {$urandom, $urandom} | (query & {$urandom, $urandom});
        endcase
        @(negedge clk) prog = 1; prog_row = 4'(r); prog_data = keys[r];
      end
      @(negedge clk) prog = 0; search = 1;
      for (int r = 0; r < H; r++) exp_lvl[r] = W - $countones(keys[r] ^ query);
      @(negedge clk) search = 0;
      // overwrite a row: the held levels must not change
      prog = 1; prog_row = 0; prog_data = ~keys[0];
      @(negedge clk) prog = 0;
      checks++;
      if (!ml_valid) failures++;
      for (int r = 0; r < H; r++) begin
        checks++;
        if (int'(ml_level[r]) != exp_lvl[r]) begin
          failures++;
          if (failures < 5) $display("row %0d level %0d expected %0d", r, ml_level[r], exp_lvl[r]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
