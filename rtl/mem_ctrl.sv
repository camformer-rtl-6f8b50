// mem_ctrl: V-prefetch memory controller.
//
// Every stage-1 winner (two per tile) names a key index whose V row must be fetched from
// DRAM into the Value SRAM slot reserved for it. The association stage pushes both
// winners of a tile at once (in_valid/in_ready; `in_first` marks the first tile of a
// query). Requests queue in a FIFO of QDEPTH entries and are issued to DRAM
// (dram_req_valid/ready, dram_req_addr = key index) with up to MAX_OUT outstanding. DRAM
// returns each row, in request order, as DV/LANES beats of LANES BF16 (dram_rsp_valid, no
// back-pressure), written straight into the Value SRAM; the last beat marks the row
// present, tagged with the query parity.
// Because the Value SRAM holds one query's 128 rows, the first request of a new query is
// held until the contextualization stage reports (`ctx_done`) that it has finished the
// previous query; `own_wait` is high while that happens. The paper gives the function
// (each top-2 triggers a V fetch, DRAM latency is hidden by the pipeline); queues, the
// DRAM port and the ownership rule are this design's choices.
module mem_ctrl
  import camformer_pkg::*;
#(
  parameter int unsigned QDEPTH  = 128,
  parameter int unsigned MAX_OUT = 16,
  parameter int unsigned DV      = 64,
  parameter int unsigned LANES   = 8,
  localparam int unsigned CH     = DV / LANES,
  localparam int unsigned CW     = (CH > 1) ? $clog2(CH) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      in_valid,
  input  logic                      in_first,
  input  logic [TOPK1-1:0][KIDX_W-1:0] in_kidx,
  input  logic [TOPK1-1:0][SLOT_W-1:0] in_slot,
  output logic                      in_ready,
  // DRAM read port
  output logic                      dram_req_valid,
  output logic [KIDX_W-1:0]         dram_req_addr,
  input  logic                      dram_req_ready,
  input  logic                      dram_rsp_valid,
  input  logic [LANES*16-1:0]       dram_rsp_data,
  // Value SRAM write port
  output logic                      vs_we,
  output logic [SLOT_W-1:0]         vs_wslot,
  output logic [CW-1:0]             vs_wchunk,
  output logic [LANES*16-1:0]       vs_wdata,
  output logic                      vs_wlast,
  output logic                      vs_wtag,
  // Value SRAM ownership
  input  logic                      ctx_done,
  output logic                      own_wait
);
  typedef struct packed {
    logic              first;
    logic [KIDX_W-1:0] kidx;
    logic [SLOT_W-1:0] slot;
  } req_t;

  typedef struct packed {
    logic [SLOT_W-1:0] slot;
    logic              tag;
  } inf_t;

  localparam int unsigned QA = $clog2(QDEPTH);
  localparam int unsigned OA = $clog2(MAX_OUT);

  req_t        q   [QDEPTH];
  inf_t        inf [MAX_OUT];
  logic [QA:0] q_wp, q_rp;
  logic [OA:0] o_wp, o_rp;
  logic [CW-1:0] beat;
  logic        busy_owner;   // Value SRAM holds a query not yet finished by the MACs
  logic        par;          // parity of the query being written
  req_t        head;
  logic        q_empty, o_full, issue;

  assign head     = q[q_rp[QA-1:0]];
  assign q_empty  = (q_wp == q_rp);
  assign o_full   = ((o_wp - o_rp) == (OA+1)'(MAX_OUT));
  assign in_ready = ((q_wp - q_rp) <= (QA+1)'(QDEPTH - TOPK1));
  assign own_wait = !q_empty && head.first && busy_owner;
  assign dram_req_valid = !q_empty && !o_full && !own_wait;
  assign dram_req_addr  = head.kidx;
  assign issue          = dram_req_valid && dram_req_ready;

  assign vs_we     = dram_rsp_valid;
  assign vs_wslot  = inf[o_rp[OA-1:0]].slot;
  assign vs_wtag   = inf[o_rp[OA-1:0]].tag;
  assign vs_wchunk = beat;
  assign vs_wdata  = dram_rsp_data;
  assign vs_wlast  = (beat == CW'(CH - 1));

  always_ff @(posedge clk) begin
    if (in_valid && in_ready)
      for (int i = 0; i < TOPK1; i++)
        q[q_wp[QA-1:0] + QA'(i)] <= '{first: in_first && (i == 0), kidx: in_kidx[i], slot: in_slot[i]};
    if (issue)
      inf[o_wp[OA-1:0]] <= '{slot: head.slot, tag: head.first ? ~par : par};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q_wp <= '0; q_rp <= '0; o_wp <= '0; o_rp <= '0; beat <= '0;
      busy_owner <= 1'b0; par <= 1'b1;
    end else begin
      if (in_valid && in_ready) q_wp <= q_wp + (QA+1)'(TOPK1);
      if (issue) begin
        q_rp <= q_rp + 1'b1;
        o_wp <= o_wp + 1'b1;
        if (head.first) par <= ~par;
      end
      if (issue && head.first) busy_owner <= 1'b1;
      else if (ctx_done)       busy_owner <= 1'b0;
      if (dram_rsp_valid) begin
        beat <= beat + 1'b1;
        if (beat == CW'(CH - 1)) begin
          beat <= '0;
          o_rp <= o_rp + 1'b1;
        end
      end
    end
  end

  initial assert ((QDEPTH & (QDEPTH - 1)) == 0 && (MAX_OUT & (MAX_OUT - 1)) == 0)
    else $error("mem_ctrl: depths must be powers of two");
  // DRAM never returns data for a request that was not issued.
  assert property (@(posedge clk) disable iff (!rst_n) dram_rsp_valid |-> (o_wp != o_rp));
endmodule
