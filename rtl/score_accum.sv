// score_accum: accumulation register for vertical tiling of the score computation.
//
// When d_k exceeds the CAM width, each key is searched in ceil(d_k / CAM_W) segments and
// the partial scores of the CAM_H rows are summed here. `first` loads the incoming partial
// scores (starting a new tile), otherwise `en` adds them to the held values. Values are
// signed; the register width ACC_W must cover the full sum. Result is registered (one
// cycle after en). The register and its purpose follow the paper; load-on-first is this
// design's choice.
module score_accum #(
  parameter int unsigned CAM_H = 16,
  parameter int unsigned IN_W  = 8,
  parameter int unsigned ACC_W = 8
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           en,
  input  logic                           first,
  input  logic signed [CAM_H-1:0][IN_W-1:0]  din,
  output logic signed [CAM_H-1:0][ACC_W-1:0] acc
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) acc <= '0;
    else if (en) begin
      for (int r = 0; r < CAM_H; r++)
        acc[r] <= first ? ACC_W'($signed(din[r])) : acc[r] + ACC_W'($signed(din[r]));
    end
  end
endmodule
