// camformer_pkg: types and constants shared by the CAMformer attention accelerator.
//
// The accelerator computes Attn(q) = SoftMax(Top-32(q K^T)) V for one binary query q at a
// time. Scores come out of a 16x64 binary-attention CAM as signed 8-bit values; the 32 best
// candidates carry their key index and the Value-SRAM slot where their V row was prefetched.
// The sizes below are the paper's main configuration (d_k = d_v = 64, n = 1024 keys,
// 16x64 CAM, top-2 per tile, top-32 overall, 8 BF16 MAC lanes). BF16 is used as plain
// 16-bit words (1 sign, 8 exponent, 7 fraction bits).
package camformer_pkg;

  localparam int unsigned CF_DK       = 64;    // query/key width (bits)
  localparam int unsigned CF_DV       = 64;    // value width (BF16 elements)
  localparam int unsigned CF_N_KEYS   = 1024;  // keys held in the Key SRAM
  localparam int unsigned CF_CAM_H    = 16;    // keys per tile (CAM rows)
  localparam int unsigned CF_CAM_W    = 64;    // CAM row width (bits)
  localparam int unsigned ADC_BITS = 6;     // SAR ADC resolution
  localparam int unsigned SCORE_W  = 8;     // scaled score width (signed)
  localparam int unsigned TOPK1    = 2;     // stage-1 winners per tile
  localparam int unsigned TOPK     = 32;    // stage-2 winners per query
  localparam int unsigned PTOP_N   = 64;    // potential-top register entries
  localparam int unsigned VROWS    = 128;   // Value SRAM rows (= candidates per query)
  localparam int unsigned CF_LANES    = 8;     // BF16 MAC lanes

  localparam int unsigned KIDX_W   = $clog2(CF_N_KEYS);
  localparam int unsigned SLOT_W   = $clog2(VROWS);

  typedef logic [15:0] bf16_t;

  // One attention-score candidate travelling from the Top-2 units to SoftMax.
  typedef struct packed {
    logic                      valid;
    logic signed [SCORE_W-1:0] score;
    logic [KIDX_W-1:0]         kidx;   // key index in the Key SRAM / row in DRAM
    logic [SLOT_W-1:0]         slot;   // Value SRAM row holding its V
  } cand_t;

  // Ordering key for the sorters: valid first, then higher score, then lower key index.
  function automatic logic [SCORE_W+KIDX_W:0] cand_key(cand_t c);
    return {c.valid, ~c.score[SCORE_W-1], c.score[SCORE_W-2:0], ~c.kidx};
  endfunction

  // Activity flags of the pipeline, brought out for monitoring and performance counting.
  typedef struct packed {
    logic searching;   // a BA-CAM search is issued
    logic cand_stall;  // association waits for PTop / memory controller to take a winner
    logic merging;     // the Top-32 sorter refines the PTop register
    logic own_wait;    // V prefetch waits for the previous query to leave the Value SRAM
    logic ob_wait;     // SoftMax waits for the output buffer
    logic div_phase;   // SoftMax streams numerators through the divider
    logic v_stall;     // a MAC row waits for its V row to arrive
  } status_t;

endpackage
