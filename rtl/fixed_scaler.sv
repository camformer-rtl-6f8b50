// fixed_scaler: the fixed multiply-by-2 and subtract-CAM_W units after the ADCs.
//
// Maps each ADC code (matchline fraction of matches) to a signed similarity score
// s = 2 * code - CAM_W, as the paper gives it, so that s equals the +-1 dot product of the
// query segment with the key segment (matches minus mismatches). With 6-bit codes the
// intermediate is 7 bits and the score 8 bits signed, the widths printed for these units.
// Combinational.
module fixed_scaler #(
  parameter int unsigned CAM_H = 16,
  parameter int unsigned BITS  = 6,
  parameter int unsigned CAM_W = 64
) (
  input  logic [CAM_H-1:0][BITS-1:0]        code,
  output logic signed [CAM_H-1:0][BITS+1:0] score
);
  always_comb begin
    for (int r = 0; r < CAM_H; r++) begin
      logic [BITS:0] x2;
      x2 = {code[r], 1'b0};                                    // X2 unit
      score[r] = $signed({1'b0, x2}) - $signed((BITS+2)'(CAM_W)); // -CAM_W unit
    end
  end
endmodule
