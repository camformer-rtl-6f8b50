// tile_top2: stage-1 ranking - the two best scores of one tile of CAM_H keys.
//
// When `in_valid` is high, the CAM_H accumulated scores of the current tile are tagged with
// their global key indices (tile_base + row) and with the Value-SRAM slots the winners will
// use (slot_base, slot_base + 1), passed through a bitonic network (bitonic_topk, N = CAM_H,
// K = 2), and the two winners are registered on `out` with `out_valid` one cycle later.
// Rows at or beyond `n_keys` (a partly filled last tile) are marked invalid. The paper gives
// the bitonic top-2 per tile of 16; the tie rule (lower index wins) and the register are
// this design's choices.
module tile_top2
  import camformer_pkg::*;
#(
  parameter int unsigned CAM_H = 16,
  parameter int unsigned K     = 2
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 in_valid,
  input  logic signed [CAM_H-1:0][SCORE_W-1:0] score,
  input  logic [KIDX_W-1:0]                    tile_base,
  input  logic [KIDX_W:0]                      n_keys,
  input  logic [SLOT_W-1:0]                    slot_base,
  output logic                                 out_valid,
  output cand_t [K-1:0]                        out
);
  cand_t [CAM_H-1:0] c;
  cand_t [K-1:0]     best;

  always_comb begin
    for (int r = 0; r < CAM_H; r++) begin
      c[r].score = score[r];
      c[r].kidx  = tile_base + KIDX_W'(r);
      c[r].valid = ((KIDX_W+1)'(tile_base) + (KIDX_W+1)'(r)) < n_keys;
      c[r].slot  = '0;
    end
  end

  bitonic_topk #(.N(CAM_H), .K(K)) u_sort (.din(c), .dout(best));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out       <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid)
        for (int i = 0; i < K; i++) begin
          out[i]      <= best[i];
          out[i].slot <= slot_base + SLOT_W'(i);
        end
    end
  end
endmodule
