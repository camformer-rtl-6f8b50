// value_sram: the 16 KB Value SRAM of the contextualization stage.
//
// ROWS = 128 rows, one per stage-1 candidate of a query, each a V row of DV = 64 BF16
// values stored as DV/LANES = 8 words of LANES = 8 BF16 (128 bits). The memory controller
// writes one word per clock (wslot, wchunk); on the row's last word (`wlast`) the row is
// marked written and tagged with the query parity `wtag`. The MACs read one 8 x BF16 word
// per clock (synchronous, rdata valid one clock after re). `row_written` and `row_tag`
// let the reader see which rows of its query have arrived; `clear` (pulsed when the MACs
// have finished a query, before any row of the next query can be written) forgets all rows,
// so rows left over from an earlier, longer query are never taken for the current one. Capacity, row count and the
// 8 x BF16 read width follow the paper; the write port and row flags are this design's.
module value_sram
  import camformer_pkg::*;
#(
  parameter int unsigned ROWS  = 128,
  parameter int unsigned DV    = 64,
  parameter int unsigned LANES = 8,
  localparam int unsigned CH   = DV / LANES,
  localparam int unsigned RW   = $clog2(ROWS),
  localparam int unsigned CW   = (CH > 1) ? $clog2(CH) : 1
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    we,
  input  logic [RW-1:0]           wslot,
  input  logic [CW-1:0]           wchunk,
  input  logic [LANES*16-1:0]     wdata,
  input  logic                    wlast,
  input  logic                    wtag,
  input  logic                    clear,
  input  logic                    re,
  input  logic [RW-1:0]           rslot,
  input  logic [CW-1:0]           rchunk,
  output logic [LANES*16-1:0]     rdata,
  output logic [ROWS-1:0]         row_written,
  output logic [ROWS-1:0]         row_tag
);
  logic [LANES*16-1:0] mem [ROWS*CH];

  // A row is never completed in the clock that clears the flags (see mem_ctrl).
  assert property (@(posedge clk) disable iff (!rst_n) clear |-> !(we && wlast));

  always_ff @(posedge clk) begin
    if (we) mem[int'(wslot) * CH + int'(wchunk)] <= wdata;
    if (re) rdata <= mem[int'(rslot) * CH + int'(rchunk)];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_written <= '0;
      row_tag     <= '0;
    end else if (clear) begin
      row_written <= '0;
    end else if (we && wlast) begin
      row_written[wslot] <= 1'b1;
      row_tag[wslot]     <= wtag;
    end
  end
endmodule
