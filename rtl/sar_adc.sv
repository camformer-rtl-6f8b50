// sar_adc: behavioural model of one 6-bit successive-approximation ADC.
//
// Behavioural model of a mixed-signal converter. On `start` it samples the matchline level
// (given as the matching-bit count m, i.e. voltage v = m / CAM_W) and then decides one bit
// per clock, MSB first, by comparing v with the trial DAC level code/2^BITS. After BITS
// clocks `done` pulses and `code` holds floor(v * 2^BITS) saturated to 2^BITS - 1, so a
// fully matching row gives 63. `busy` is high while converting. Six cycles per conversion
// and the saturation at full scale are this design's choices; the 6-bit SAR type is the
// paper's.
module sar_adc #(
  parameter int unsigned BITS  = 6,
  parameter int unsigned CAM_W = 64,
  localparam int unsigned LW   = $clog2(CAM_W) + 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            start,
  input  logic [LW-1:0]   ml_level,
  output logic            busy,
  output logic            done,
  output logic [BITS-1:0] code
);
  localparam int unsigned CW = $clog2(BITS + 1);

  logic [LW-1:0]   held;     // sample-and-hold
  logic [BITS-1:0] sar;      // successive-approximation register
  logic [CW-1:0]   bitpos;   // bit being decided
  logic [BITS-1:0] trial;
  logic            ge;

  assign trial = sar | (BITS'(1) << bitpos);
  // v >= trial / 2^BITS  <=>  m * 2^BITS >= trial * CAM_W
  assign ge = ((32'(held) << BITS) >= (32'(trial) * CAM_W));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; held <= '0; sar <= '0; bitpos <= '0; code <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy   <= 1'b1;
        held   <= ml_level;
        sar    <= '0;
        bitpos <= CW'(BITS - 1);
      end else if (busy) begin
        if (ge) sar <= trial;
        if (bitpos == '0) begin
          busy <= 1'b0;
          done <= 1'b1;
          code <= ge ? trial : sar;
        end else begin
          bitpos <= bitpos - 1'b1;
        end
      end
    end
  end
endmodule
