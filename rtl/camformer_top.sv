// camformer_top: the CAMformer attention accelerator.
//
// Computes, for one binary query q at a time, A = SoftMax(Top-32(q K^T)) V with binary
// keys K (n = 1024 x d_k = 64 bits, loaded once into the Key SRAM) and BF16 values V
// (fetched from DRAM on demand). Three stages run as a coarse-grained pipeline, each on a
// different query:
//   association       BA-CAM scores per tile of 16 keys, top-2 per tile (2 x 64 = 128
//                     candidates); each winner is pushed to the PTop register and to the
//                     memory controller, which prefetches its V row into the Value SRAM;
//   normalization     the PTop register / Top-32 sorter refine the candidates to 32 as they
//                     arrive, then the SoftMax engine turns their scores into BF16
//                     probabilities in the output buffer;
//   contextualization 8 BF16 MACs form A = sum_i p_i V_i over the 32 winners.
// A stage that finishes early waits for the next one to free its buffer (the hand-offs are
// valid/ready or full/release, see the sub-modules), which gives the stall / no-op time of
// the paper's coarse-grained pipeline.
// Ports: key load (DMA side), query + number of keys to search + final top-k (`cfg_k`, runtime sparsity), DRAM read port for V rows
// (request = key index; response = 8 beats of 8 BF16, in order), attention output A (64
// BF16) with valid/ready, and activity flags (`status`) for performance monitoring. The DMA, host and DRAM themselves are outside this module.
module camformer_top
  import camformer_pkg::*;
#(
  parameter int unsigned N_KEYS = camformer_pkg::CF_N_KEYS,
  parameter int unsigned DK     = camformer_pkg::CF_DK,
  parameter int unsigned DV     = camformer_pkg::CF_DV,
  localparam int unsigned NT    = N_KEYS / CF_CAM_H,
  localparam int unsigned AW    = $clog2(N_KEYS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  key_we,
  input  logic [AW-1:0]         key_waddr,
  input  logic [DK-1:0]         key_wdata,
  input  logic                  q_valid,
  input  logic [DK-1:0]         q_data,
  input  logic [AW:0]           cfg_n_keys,
  input  logic [$clog2(TOPK+1)-1:0] cfg_k,
  output logic                  q_ready,
  output logic                  dram_req_valid,
  output logic [KIDX_W-1:0]     dram_req_addr,
  input  logic                  dram_req_ready,
  input  logic                  dram_rsp_valid,
  input  logic [CF_LANES*16-1:0]   dram_rsp_data,
  output logic                  a_valid,
  output bf16_t [DV-1:0]        a_data,
  input  logic                  a_ready,
  output status_t               status
);
  localparam int unsigned CH = DV / CF_LANES;
  localparam int unsigned CW = (CH > 1) ? $clog2(CH) : 1;

  // association -> PTop / memory controller
  logic              cand_valid, cand_first, cand_last, cand_ready, cand_stall, searching;
  logic [$clog2(TOPK+1)-1:0] cand_k;
  cand_t [TOPK1-1:0] cand;
  logic              pt_ready, mc_ready, merging;
  // PTop -> SoftMax
  logic              fin_valid, fin_ready;
  cand_t [TOPK-1:0]  fin;
  // SoftMax -> output buffer -> context
  logic              ob_wr_en, ob_wr_valid, ob_commit, ob_release, ob_full, ob_wait, div_phase;
  logic [$clog2(TOPK)-1:0] ob_wr_idx;
  bf16_t             ob_wr_prob;
  logic [SLOT_W-1:0] ob_wr_slot;
  bf16_t [TOPK-1:0]  ob_prob;
  logic [TOPK-1:0][SLOT_W-1:0] ob_slot;
  logic [TOPK-1:0]   ob_valid;
  // Value SRAM
  logic              vs_we, vs_wlast, vs_wtag, vs_re;
  logic [SLOT_W-1:0] vs_wslot, vs_rslot;
  logic [CW-1:0]     vs_wchunk, vs_rchunk;
  logic [CF_LANES*16-1:0] vs_wdata, vs_rdata;
  logic [VROWS-1:0]  row_written, row_tag;
  logic              ctx_done, own_wait, v_stall;

  association_stage #(.N_KEYS(N_KEYS), .DK(DK), .CAM_H(CF_CAM_H), .CAM_W(CF_CAM_W)) u_assoc (
    .clk, .rst_n, .key_we, .key_waddr, .key_wdata,
    .q_valid, .q_data, .cfg_n_keys, .cfg_k, .q_ready,
    .cand_valid, .cand_first, .cand_last, .cand_k, .cand, .cand_ready, .cand_stall, .searching);

  assign cand_ready = pt_ready && mc_ready;

  ptop_reg #(.ENTRIES(PTOP_N), .K_OUT(TOPK), .K_IN(TOPK1)) u_ptop (
    .clk, .rst_n, .in_valid(cand_valid && mc_ready), .in_last(cand_last), .in_k(cand_k), .in_cand(cand),
    .in_ready(pt_ready), .out_valid(fin_valid), .out(fin), .out_ready(fin_ready),
    .merging(merging));

  logic [TOPK1-1:0][KIDX_W-1:0] c_kidx;
  logic [TOPK1-1:0][SLOT_W-1:0] c_slot;
  always_comb
    for (int i = 0; i < TOPK1; i++) begin
      c_kidx[i] = cand[i].kidx;
      c_slot[i] = cand[i].slot;
    end

  mem_ctrl #(.DV(DV), .LANES(CF_LANES)) u_mc (
    .clk, .rst_n, .in_valid(cand_valid && pt_ready), .in_first(cand_first),
    .in_kidx(c_kidx), .in_slot(c_slot), .in_ready(mc_ready),
    .dram_req_valid, .dram_req_addr, .dram_req_ready, .dram_rsp_valid, .dram_rsp_data,
    .vs_we, .vs_wslot, .vs_wchunk, .vs_wdata, .vs_wlast, .vs_wtag,
    .ctx_done, .own_wait);

  softmax_engine #(.K(TOPK)) u_smax (
    .clk, .rst_n, .in_valid(fin_valid), .in_cand(fin), .in_ready(fin_ready),
    .ob_full, .ob_wr_en, .ob_wr_idx, .ob_wr_prob, .ob_wr_slot, .ob_wr_valid, .ob_commit,
    .ob_wait, .div_phase);

  output_buffer #(.K(TOPK)) u_obuf (
    .clk, .rst_n, .wr_en(ob_wr_en), .wr_idx(ob_wr_idx), .wr_prob(ob_wr_prob),
    .wr_slot(ob_wr_slot), .wr_valid(ob_wr_valid), .commit(ob_commit), .release_i(ob_release),
    .full(ob_full), .prob(ob_prob), .slot(ob_slot), .valid(ob_valid));

  value_sram #(.ROWS(VROWS), .DV(DV), .LANES(CF_LANES)) u_vsram (
    .clk, .rst_n, .we(vs_we), .wslot(vs_wslot), .wchunk(vs_wchunk), .wdata(vs_wdata),
    .wlast(vs_wlast), .wtag(vs_wtag), .clear(ctx_done), .re(vs_re), .rslot(vs_rslot), .rchunk(vs_rchunk),
    .rdata(vs_rdata), .row_written(row_written), .row_tag(row_tag));

  context_stage #(.K(TOPK), .DV(DV), .LANES(CF_LANES), .ROWS(VROWS)) u_ctx (
    .clk, .rst_n, .ob_full, .ob_prob, .ob_slot, .ob_valid, .ob_release,
    .vs_re, .vs_rslot, .vs_rchunk, .vs_rdata, .vs_row_written(row_written),
    .vs_row_tag(row_tag), .a_valid, .a_data, .a_ready, .ctx_done, .v_stall);

  assign status = '{searching: searching, cand_stall: cand_stall, merging: merging,
                    own_wait: own_wait, ob_wait: ob_wait, div_phase: div_phase,
                    v_stall: v_stall};

  // The Value SRAM holds one query's candidates: the key set must not yield more.
  initial assert (2 * (N_KEYS / CF_CAM_H) <= VROWS) else $error("camformer_top: too many tiles for the Value SRAM");
endmodule
