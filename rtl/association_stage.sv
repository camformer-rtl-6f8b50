// association_stage: binary attention scores and stage-1 (top-2 per tile) ranking.
//
// For one binary query, the keys are processed in tiles of CAM_H = 16. For each tile and
// each of the NSEG = ceil(d_k / CAM_W) vertical segments the controller
//   1. programs the BA-CAM row by row from the Key SRAM (CAM_H + 1 clocks, one key per
//      clock plus the read latency),
//   2. searches it with the matching query segment (1 clock),
//   3. lets the 16 SAR ADCs sample the matchlines and convert (7 clocks), scales the codes
//      to signed scores s = 2 * code - CAM_W and adds them in the accumulation register.
// Step 3 of one tile overlaps step 1 of the next: this is the fine-grained pipelining of
// the paper, so a tile costs CAM_H + 2 clocks per segment. After the last segment the
// bitonic top-2 unit tags the two best scores with their key indices and Value-SRAM slots
// (2 * tile, 2 * tile + 1) and holds them in `cand` until both the PTop register and the
// memory controller take them (cand_valid/cand_ready); a new search waits while that
// candidate is still held (`cand_stall`). `cand_first`/`cand_last` mark the query's first
// and last tile. A new query is accepted (q_valid/q_ready) when the previous one has
// issued its last search; `cfg_n_keys` (1 .. N_KEYS, 0 meaning N_KEYS) sets how many keys
// it sees, so the key set can grow as in causal decoding: ceil(n / CAM_H) tiles are searched
// and rows at or beyond n in the last tile are never selected. The datapath (query buffer, Key SRAM,
// BA-CAM, ADCs, fixed scalers, accumulation register, bitonic top-2) follows the paper;
// the controller and cycle schedule are this design's. `cfg_k` (runtime sparsity, the final
// top-k of the query) is latched with the query and passed on as `cand_k` with the last pair. Accumulated scores wider than
// 8 bits (d_k > 64) saturate to 8 bits before ranking.
module association_stage
  import camformer_pkg::*;
#(
  parameter int unsigned N_KEYS = 1024,
  parameter int unsigned DK     = 64,
  parameter int unsigned CAM_H  = 16,
  parameter int unsigned CAM_W  = 64,
  localparam int unsigned NSEG  = (DK + CAM_W - 1) / CAM_W,
  localparam int unsigned SEG_W = (NSEG > 1) ? $clog2(NSEG) : 1,
  localparam int unsigned NT    = N_KEYS / CAM_H,
  localparam int unsigned TW    = $clog2(NT + 1),
  localparam int unsigned AW    = $clog2(N_KEYS),
  localparam int unsigned RW    = $clog2(CAM_H),
  localparam int unsigned LW    = $clog2(CAM_W) + 1,
  localparam int unsigned SW    = ADC_BITS + 2,
  localparam int unsigned ACC_W = SW + ((NSEG > 1) ? $clog2(NSEG) : 0),
  localparam int unsigned KW    = $clog2(TOPK + 1)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // Key SRAM load (from the DMA)
  input  logic                 key_we,
  input  logic [AW-1:0]        key_waddr,
  input  logic [DK-1:0]        key_wdata,
  // query input
  input  logic                 q_valid,
  input  logic [DK-1:0]        q_data,
  input  logic [AW:0]          cfg_n_keys,
  input  logic [KW-1:0]        cfg_k,         // final top-k of this query (0 = TOPK)
  output logic                 q_ready,
  // stage-1 winners
  output logic                 cand_valid,
  output logic                 cand_first,
  output logic                 cand_last,
  output logic [KW-1:0]        cand_k,        // the query's k, valid with cand_last
  output cand_t [TOPK1-1:0]    cand,
  input  logic                 cand_ready,
  output logic                 cand_stall,
  output logic                 searching
);
  typedef enum logic [1:0] {A_IDLE, A_PROG, A_SEARCH} state_t;
  state_t state;

  logic [TW-1:0]    n_tiles, tile;
  logic [SEG_W-1:0] seg;
  logic [RW:0]      prow;            // key row being read (0..CAM_H)
  logic             wr_v;            // key word from the SRAM is written to the CAM
  logic [RW-1:0]    wr_row;
  logic [DK-1:0]    key_rd;
  logic [CAM_W-1:0] q_seg;
  logic             search, adc_start;
  logic             ml_valid;
  logic [CAM_H-1:0][LW-1:0]       ml_level;
  logic [CAM_H-1:0]               adc_busy, adc_done;
  logic [CAM_H-1:0][ADC_BITS-1:0] code;
  logic signed [CAM_H-1:0][SW-1:0]    sc;
  logic signed [CAM_H-1:0][ACC_W-1:0] acc;
  logic signed [CAM_H-1:0][SCORE_W-1:0] sat;
  // in-flight tile (between search and the candidate register)
  logic             fl_busy, fl_first_seg, fl_last_seg, fl_first, fl_last;
  logic [TW-1:0]    fl_tile;
  logic [AW:0]      n_keys, fl_nkeys;
  logic [KW-1:0]    k_q, fl_k;
  logic             acc_done, t2_v;
  cand_t [TOPK1-1:0] t2;

  wire last_seg  = (seg == SEG_W'(NSEG - 1));
  wire last_tile = (tile == n_tiles - 1'b1);

  assign q_ready    = (state == A_IDLE);
  assign search     = (state == A_SEARCH) && !fl_busy && !cand_valid && !(|adc_busy);
  assign cand_stall = (state == A_SEARCH) && cand_valid && !cand_ready;
  assign searching  = search;

  query_buffer #(.DK(DK), .CAM_W(CAM_W)) u_qbuf (
    .clk(clk), .rst_n(rst_n), .load(q_valid && q_ready), .q_in(q_data), .seg(seg), .q_seg(q_seg));

  key_sram #(.N_KEYS(N_KEYS), .DK(DK)) u_ksram (
    .clk(clk), .we(key_we), .waddr(key_waddr), .wdata(key_wdata),
    .re(state == A_PROG && prow < (RW+1)'(CAM_H)),
    .raddr(AW'(tile) * AW'(CAM_H) + AW'(prow)), .rdata(key_rd));

  logic [NSEG*CAM_W-1:0] key_pad;
  assign key_pad = (NSEG*CAM_W)'(key_rd);

  ba_cam_array #(.CAM_H(CAM_H), .CAM_W(CAM_W)) u_cam (
    .clk(clk), .rst_n(rst_n), .prog(wr_v), .prog_row(wr_row),
    .prog_data(key_pad[seg*CAM_W +: CAM_W]), .search(search), .query(q_seg),
    .ml_valid(ml_valid), .ml_level(ml_level));

  for (genvar r = 0; r < CAM_H; r++) begin : g_adc
    sar_adc #(.BITS(ADC_BITS), .CAM_W(CAM_W)) u_adc (
      .clk(clk), .rst_n(rst_n), .start(adc_start && ml_valid), .ml_level(ml_level[r]),
      .busy(adc_busy[r]), .done(adc_done[r]), .code(code[r]));
  end

  fixed_scaler #(.CAM_H(CAM_H), .BITS(ADC_BITS), .CAM_W(CAM_W)) u_scale (.code(code), .score(sc));

  score_accum #(.CAM_H(CAM_H), .IN_W(SW), .ACC_W(ACC_W)) u_acc (
    .clk(clk), .rst_n(rst_n), .en(&adc_done), .first(fl_first_seg), .din(sc), .acc(acc));

  always_comb begin
    for (int r = 0; r < CAM_H; r++) begin
      if ($signed(acc[r]) > $signed(ACC_W'(127)))        sat[r] = 8'sd127;
      else if ($signed(acc[r]) < $signed(-ACC_W'(128)))  sat[r] = -8'sd128;
      else                                               sat[r] = SCORE_W'(acc[r]);
    end
  end

  tile_top2 #(.CAM_H(CAM_H), .K(TOPK1)) u_top2 (
    .clk(clk), .rst_n(rst_n), .in_valid(acc_done && fl_last_seg), .score(sat),
    .tile_base(KIDX_W'(fl_tile) * KIDX_W'(CAM_H)),
    .n_keys((KIDX_W+1)'(fl_nkeys)),
    .slot_base(SLOT_W'(fl_tile) * SLOT_W'(TOPK1)),
    .out_valid(t2_v), .out(t2));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= A_IDLE; n_tiles <= '0; tile <= '0; seg <= '0; prow <= '0;
      wr_v <= 1'b0; wr_row <= '0; adc_start <= 1'b0; acc_done <= 1'b0;
      fl_busy <= 1'b0; fl_first_seg <= 1'b0; fl_last_seg <= 1'b0; fl_first <= 1'b0;
      fl_last <= 1'b0; fl_tile <= '0; n_keys <= '0; fl_nkeys <= '0;
      k_q <= '0; fl_k <= '0; cand_k <= '0;
      cand_valid <= 1'b0; cand_first <= 1'b0; cand_last <= 1'b0; cand <= '0;
    end else begin
      adc_start <= search;
      acc_done  <= &adc_done;
      wr_v      <= (state == A_PROG) && (prow < (RW+1)'(CAM_H));
      wr_row    <= prow[RW-1:0];

      case (state)
        A_IDLE: if (q_valid) begin
          k_q     <= (cfg_k == '0 || cfg_k > KW'(TOPK)) ? KW'(TOPK) : cfg_k;
          n_keys  <= (cfg_n_keys == '0 || cfg_n_keys > (AW+1)'(N_KEYS)) ? (AW+1)'(N_KEYS) : cfg_n_keys;
          n_tiles <= (cfg_n_keys == '0 || cfg_n_keys > (AW+1)'(N_KEYS)) ? TW'(NT)
                     : TW'((cfg_n_keys + (AW+1)'(CAM_H - 1)) / (AW+1)'(CAM_H));
          tile <= '0; seg <= '0; prow <= '0; state <= A_PROG;
        end
        A_PROG: begin
          prow <= prow + 1'b1;
          if (prow == (RW+1)'(CAM_H)) state <= A_SEARCH;   // last row is written now
        end
        A_SEARCH: if (search) begin
          fl_busy      <= 1'b1;
          fl_first_seg <= (seg == '0);
          fl_last_seg  <= last_seg;
          fl_first     <= (tile == '0);
          fl_last      <= last_tile;
          fl_tile      <= tile;
          fl_nkeys     <= n_keys;
          fl_k         <= k_q;
          prow         <= '0;
          if (!last_seg) begin
            seg <= seg + 1'b1; state <= A_PROG;
          end else begin
            seg <= '0;
            if (last_tile) state <= A_IDLE;
            else begin tile <= tile + 1'b1; state <= A_PROG; end
          end
        end
        default: state <= A_IDLE;
      endcase

      // in-flight tile retires into the candidate register
      if (acc_done && !fl_last_seg) fl_busy <= 1'b0;
      if (cand_valid && cand_ready) cand_valid <= 1'b0;
      if (t2_v) begin
        fl_busy    <= 1'b0;
        cand_valid <= 1'b1;
        cand       <= t2;
        cand_first <= fl_first;
        cand_last  <= fl_last;
        cand_k     <= fl_k;
      end
    end
  end

  // A new tile result never overwrites a candidate that has not been taken.
  assert property (@(posedge clk) disable iff (!rst_n) t2_v |-> !(cand_valid && !cand_ready));
endmodule
