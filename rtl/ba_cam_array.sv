// ba_cam_array: behavioural model of the 16x64 Binary-Attention CAM (BA-CAM) array.
//
// Behavioural model of an analog/mixed-signal macro. In silicon each 10T1C cell stores one
// key bit in an SRAM latch and compares it with the broadcast query bit through XNOR logic;
// a matching cell keeps its precharged capacitor high, a mismatching one discharges it, and
// charge sharing along the row's matchline then leaves a voltage equal to the fraction of
// matching bits. This model stores the bits and reports, per row, that voltage scaled by
// CAM_W, i.e. the number of matching bits (0..CAM_W): an ideal, noise-free, linear matchline.
//
// Interface: `prog` writes `prog_data` into row `prog_row` (one row per clock). `search`
// runs the four phases (precharge, broadcast, match, charge share) in one clock; the
// matchline levels are then held in `ml_level` with `ml_valid` high until the next search
// or program, so the ADCs can sample them. Reprogramming does not disturb held levels:
// the paper says readout is non-destructive and supports pipelining.
module ba_cam_array #(
  parameter int unsigned CAM_H = 16,
  parameter int unsigned CAM_W = 64,
  localparam int unsigned RW   = $clog2(CAM_H),
  localparam int unsigned LW   = $clog2(CAM_W) + 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 prog,
  input  logic [RW-1:0]        prog_row,
  input  logic [CAM_W-1:0]     prog_data,
  input  logic                 search,
  input  logic [CAM_W-1:0]     query,
  output logic                 ml_valid,
  output logic [CAM_H-1:0][LW-1:0] ml_level
);
  logic [CAM_W-1:0] cells [CAM_H];
  logic [CAM_H-1:0][LW-1:0] match_cnt;

  // XNOR per cell, then the charge-share sum along each matchline.
  always_comb begin
    logic m;
    for (int r = 0; r < CAM_H; r++) begin
      match_cnt[r] = '0;
      for (int c = 0; c < CAM_W; c++) begin
        m = cells[r][c] ~^ query[c];
        match_cnt[r] = match_cnt[r] + LW'(m);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (prog) cells[prog_row] <= prog_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ml_valid <= 1'b0;
      ml_level <= '0;
    end else if (search) begin
      ml_valid <= 1'b1;
      ml_level <= match_cnt;
    end
  end
endmodule
