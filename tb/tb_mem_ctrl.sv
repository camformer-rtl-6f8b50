// tb_mem_ctrl: pushes the stage-1 winners of several queries (2 per tile) into the memory
// controller, with a DRAM model that stalls requests and answers after 20 clocks. Checks
// that every Value SRAM word written carries the right slot, word index, data (the DRAM
// row of that winner's key) and query-parity tag, that no row of a new query is written
// before `ctx_done` released the previous one (the ownership wait must occur), and that
// every requested row arrives.
module tb_mem_ctrl;
  import camformer_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, in_first = 0, in_ready;
  logic [1:0][9:0] in_kidx = '0;
  logic [1:0][6:0] in_slot = '0;
  logic dram_req_valid, dram_req_ready, dram_rsp_valid;
  logic [9:0] dram_req_addr;
  logic [127:0] dram_rsp_data, vs_wdata;
  logic vs_we, vs_wlast, vs_wtag, ctx_done = 0, own_wait;
  logic [6:0] vs_wslot;
  logic [2:0] vs_wchunk;
  int kidx_of [4][128];
  int rows_done [4];
  int ntiles [4];
  int checks = 0, failures = 0, own_waits = 0, wq = 0, beat = 0;
  logic released = 1;

  mem_ctrl #(.QDEPTH(128), .MAX_OUT(16), .DV(64), .LANES(8)) dut (.clk, .rst_n, .in_valid,
    .in_first, .in_kidx, .in_slot, .in_ready, .dram_req_valid, .dram_req_addr, .dram_req_ready,
    .dram_rsp_valid, .dram_rsp_data, .vs_we, .vs_wslot, .vs_wchunk, .vs_wdata, .vs_wlast,
    .vs_wtag, .ctx_done, .own_wait);

  dram_model #(.LATENCY(20), .STALLS(1)) u_dram (.clk, .rst_n, .req_valid(dram_req_valid),
    .req_addr(dram_req_addr), .req_ready(dram_req_ready), .rsp_valid(dram_rsp_valid),
    .rsp_data(dram_rsp_data));

  always #5 clk = ~clk;
  always @(posedge clk) if (own_wait) own_waits++;

  // Value SRAM write checker; wq = index of the query being written (parity = wq % 2)
  always @(posedge clk) if (rst_n && vs_we) begin
    int k, q;
    logic [127:0] e;
    q = (vs_wtag == 1'(wq % 2)) ? wq : wq + 1;
    if (q != wq) begin
      checks++;
      if (!released) begin failures++; $display("query %0d written before release", q); end
      wq = q; released = 0;
    end
    k = kidx_of[q][vs_wslot];
    for (int l = 0; l < 8; l++) e[l*16 +: 16] = u_dram.vdata(k, int'(vs_wchunk) * 8 + l);
    checks++;
    if (vs_wdata !== e || vs_wchunk !== 3'(beat) || vs_wlast !== (beat == 7)) begin
      failures++;
      if (failures < 5) $display("slot %0d word %0d bad", vs_wslot, vs_wchunk);
    end
    beat = (beat + 1) % 8;
    if (vs_wlast) rows_done[q]++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int q = 0; q < 4; q++) begin rows_done[q] = 0; ntiles[q] = (q == 1) ? 64 : 8 + $urandom_range(40); end
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      // producer: all queries back to back, as the association stage would
      for (int q = 0; q < 4; q++) begin
        for (int t = 0; t < ntiles[q]; t++) begin
          @(negedge clk);
          while (!in_ready) @(negedge clk);
          in_valid = 1; in_first = (t == 0);
          for (int i = 0; i < 2; i++) begin
            in_kidx[i] = 10'($urandom);
            in_slot[i] = 7'(2 * t + i);
            kidx_of[q][2 * t + i] = int'(in_kidx[i]);
          end
          @(negedge clk) in_valid = 0;
        end
      end
      // the MACs finish each query some time after all its rows arrived
      for (int q = 0; q < 4; q++) begin
        while (rows_done[q] < 2 * ntiles[q]) @(negedge clk);
        repeat (30) @(negedge clk);
        checks++;
        if (rows_done[q] != 2 * ntiles[q]) failures++;
        released = 1;
        ctx_done = 1;
        @(negedge clk) ctx_done = 0;
      end
    join
    checks++;
    if (own_waits == 0) begin failures++; $display("ownership wait never seen"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
