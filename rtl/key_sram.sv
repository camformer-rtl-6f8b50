// key_sram: the Key SRAM holding the whole binarized key matrix K.
//
// N_KEYS rows of DK bits (1024 x 64 b = 8 KB in the paper). Keys are written once per
// sequence through the write port (from the DMA) and read one row per cycle while the
// association stage programs the BA-CAM. Synchronous read: rdata is valid the cycle after
// `re`. The size follows the paper; the 1R1W port arrangement is this design's choice.
module key_sram #(
  parameter int unsigned N_KEYS = 1024,
  parameter int unsigned DK     = 64,
  localparam int unsigned AW    = $clog2(N_KEYS)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [DK-1:0] wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [DK-1:0] rdata
);
  logic [DK-1:0] mem [N_KEYS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
