// query_buffer: holds the single binary query being processed (batch = 1).
//
// A new DK-bit query is latched when `load` is high. The buffer presents one CAM_W-bit
// segment at a time to the BA-CAM search lines; `seg` selects which vertical tile of the
// query is broadcast (only segment 0 exists when DK = CAM_W = 64, the paper's case).
// Timing: q_seg is combinational from the stored query and `seg`.
// The 64x1 buffer follows the paper; the one-cycle parallel load is this design's choice.
module query_buffer #(
  parameter int unsigned DK    = 64,
  parameter int unsigned CAM_W = 64,
  localparam int unsigned NSEG  = (DK + CAM_W - 1) / CAM_W,
  localparam int unsigned SEG_W = (NSEG > 1) ? $clog2(NSEG) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic [DK-1:0]    q_in,
  input  logic [SEG_W-1:0] seg,
  output logic [CAM_W-1:0] q_seg
);
  logic [NSEG*CAM_W-1:0] q_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q_r <= '0;
    else if (load) q_r <= (NSEG*CAM_W)'(q_in);
  end

  assign q_seg = q_r[seg*CAM_W +: CAM_W];
endmodule
