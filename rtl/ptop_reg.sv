// ptop_reg: potential-top register and stage-2 (Top-32) refinement control.
//
// Holds up to ENTRIES = 64 candidates of the current query. Each tile delivers two
// stage-1 winners (in_valid/in_ready handshake), appended behind the entries already held.
// When the register becomes full, the 64-input Top-32 sorter (bitonic_topk) keeps the best
// K_OUT = 32 in entries 0..31 and frees the rest, so each further group of 16 tiles refills
// it: for n = 1024 keys that is a refinement after tiles 32, 48 and 64, as the paper
// describes. On the tile flagged `in_last` a final refinement runs and the best 32 are
// copied to `out` (out_valid/out_ready) and the register is emptied for the next query.
// Runtime sparsity: `in_k` (1..K_OUT), given with the last pair, keeps only the best in_k
// of the final list valid; the rest are passed on marked invalid and get no weight.
// A refinement takes one clock, during which in_ready is low; a final refinement also
// waits while the previous final result has not been taken (a stall towards association).
module ptop_reg
  import camformer_pkg::*;
#(
  parameter int unsigned ENTRIES = 64,
  parameter int unsigned K_OUT   = 32,
  parameter int unsigned K_IN    = 2,
  localparam int unsigned KW     = $clog2(K_OUT + 1)
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_last,
  input  logic [KW-1:0]       in_k,        // final k of the query, taken with in_last
  input  cand_t [K_IN-1:0]    in_cand,
  output logic                in_ready,
  output logic                out_valid,
  output cand_t [K_OUT-1:0]   out,
  input  logic                out_ready,
  output logic                merging      // a refinement runs this cycle
);
  localparam int unsigned CW = $clog2(ENTRIES + 1);

  cand_t [ENTRIES-1:0] ent;
  cand_t [K_OUT-1:0]   best;
  logic [CW-1:0]       cnt;
  logic                merge_pend, merge_final;
  logic [KW-1:0]       fin_k;

  bitonic_topk #(.N(ENTRIES), .K(K_OUT)) u_top32 (.din(ent), .dout(best));

  assign merging  = merge_pend && !(merge_final && out_valid && !out_ready);
  assign in_ready = !merge_pend;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ent <= '0; cnt <= '0; merge_pend <= 1'b0; merge_final <= 1'b0;
      out_valid <= 1'b0; out <= '0; fin_k <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        for (int i = 0; i < K_IN; i++) ent[int'(cnt) + i] <= in_cand[i];
        cnt <= cnt + CW'(K_IN);
        if (in_last) begin
          merge_pend <= 1'b1; merge_final <= 1'b1;
          fin_k <= in_k;
        end else if (int'(cnt) + K_IN == ENTRIES) begin
          merge_pend <= 1'b1; merge_final <= 1'b0;
        end
      end else if (merging) begin
        merge_pend <= 1'b0;
        if (merge_final) begin
          // runtime sparsity: only the best fin_k stay valid
          for (int i = 0; i < K_OUT; i++) begin
            out[i]       <= best[i];
            out[i].valid <= best[i].valid && (i < int'(fin_k));
          end
          out_valid <= 1'b1;
          ent       <= '0;
          cnt       <= '0;
        end else begin
          for (int i = 0; i < ENTRIES; i++) ent[i] <= (i < K_OUT) ? best[i] : '0;
          cnt <= CW'(K_OUT);
        end
      end
    end
  end

  // ENTRIES must be a multiple of K_IN so the register fills exactly.
  initial assert (ENTRIES % K_IN == 0 && K_OUT < ENTRIES) else $error("ptop_reg: bad sizes");
  // Candidates are never offered into a full register.
  assert property (@(posedge clk) disable iff (!rst_n) (in_valid && in_ready) |-> (int'(cnt) + K_IN <= ENTRIES));
endmodule
