// tb_value_sram: writes random V rows (8 words each) into random slots with random query
// tags, checks the written/tag flags after each row's last word, reads every word back
// with the one-clock latency, and checks that `clear` forgets all rows.
module tb_value_sram;
  logic clk = 0, rst_n = 0, we = 0, wlast = 0, wtag = 0, re = 0, clear = 0;
  logic [6:0] wslot = 0, rslot = 0;
  logic [2:0] wchunk = 0, rchunk = 0;
  logic [127:0] wdata = 0, rdata;
  logic [127:0] row_written, row_tag;
  logic [127:0] model [128][8];
  logic mw [128];
  logic mt [128];
  int checks = 0, failures = 0;

  value_sram #(.ROWS(128), .DV(64), .LANES(8)) dut (.clk, .rst_n, .we, .wslot, .wchunk, .wdata,
    .wlast, .wtag, .clear, .re, .rslot, .rchunk, .rdata, .row_written, .row_tag);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 128; s++) mw[s] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checks++;
    if (row_written != '0) failures++;
    for (int t = 0; t < 300; t++) begin
      int s;
      logic tg;
      s = $urandom_range(127); tg = 1'($urandom);
      for (int c = 0; c < 8; c++) begin
        we = 1; wslot = 7'(s); wchunk = 3'(c); wlast = (c == 7); wtag = tg;
        wdata = {$urandom, $urandom, $urandom, $urandom};
        model[s][c] = wdata;
        @(negedge clk);
        if (c < 7) begin
          checks++;
          if (mw[s] !== row_written[s]) failures++;   // not marked before the last word
        end
      end
      we = 0; mw[s] = 1; mt[s] = tg;
      checks++;
      if (!row_written[s] || row_tag[s] !== tg) failures++;
    end
    for (int s = 0; s < 128; s++) begin
      if (!mw[s]) continue;
      for (int c = 0; c < 8; c++) begin
        re = 1; rslot = 7'(s); rchunk = 3'(c);
        @(negedge clk) re = 0;
        checks++;
        if (rdata !== model[s][c]) begin
          failures++;
          if (failures < 5) $display("slot %0d word %0d mismatch", s, c);
        end
      end
    end
    clear = 1;
    @(negedge clk) clear = 0;
    checks++;
    if (row_written != '0) begin failures++; $display("clear failed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
