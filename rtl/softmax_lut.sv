// softmax_lut: the 512-byte exponent look-up table of the SoftMax engine.
//
// 256 entries of BF16, addressed by an 8-bit two's-complement score x; entry x holds
// exp(x / sqrt(d_k)) = exp(x / 8) for d_k = 64, rounded to nearest even BF16. Scores from
// the CAM lie in [-64, 62], so the table covers them with room to spare. The contents are
// loaded from rtl/softmax_exp_lut.hex (one 4-digit hex word per line, address 0 first).
// Synchronous read: `data` is valid one clock after `addr`. The 512 B size is the
// paper's; the exact scaling exp(x/sqrt(d_k)) is this design's reading of it.
module softmax_lut #(
  parameter int unsigned DEPTH = 256
) (
  input  logic                     clk,
  input  logic [$clog2(DEPTH)-1:0] addr,
  output logic [15:0]              data
);
  logic [15:0] rom [DEPTH];

  initial $readmemh("rtl/softmax_exp_lut.hex", rom);

  always_ff @(posedge clk) data <= rom[addr];
endmodule
