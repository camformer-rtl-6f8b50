// output_buffer: hand-off buffer of 32 normalised attention weights.
//
// The SoftMax engine writes entry `wr_idx` (BF16 probability plus the candidate's
// Value-SRAM slot and valid flag) and then pulses `commit`; `full` stays high until the
// contextualization stage pulses `release` when it has used the entries. While full, the
// SoftMax engine must not write (checked by an assertion). Writes take effect at the
// clock edge; the contents are read combinationally. The 32 x BF16 buffer is the paper's;
// the full/commit/release protocol is this design's choice.
module output_buffer
  import camformer_pkg::*;
#(
  parameter int unsigned K = 32
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_en,
  input  logic [$clog2(K)-1:0]  wr_idx,
  input  bf16_t                 wr_prob,
  input  logic [SLOT_W-1:0]     wr_slot,
  input  logic                  wr_valid,
  input  logic                  commit,
  input  logic                  release_i,
  output logic                  full,
  output bf16_t [K-1:0]         prob,
  output logic  [K-1:0][SLOT_W-1:0] slot,
  output logic  [K-1:0]         valid
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full <= 1'b0; prob <= '0; slot <= '0; valid <= '0;
    end else begin
      if (wr_en) begin
        prob[wr_idx]  <= wr_prob;
        slot[wr_idx]  <= wr_slot;
        valid[wr_idx] <= wr_valid;
      end
      if (commit)         full <= 1'b1;
      else if (release_i) full <= 1'b0;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> !full);
  assert property (@(posedge clk) disable iff (!rst_n) release_i |-> full);
endmodule
