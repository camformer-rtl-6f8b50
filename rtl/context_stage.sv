// context_stage: contextualization - the sparse BF16 product A = P V.
//
// Starts when the output buffer is full. The 64 x BF16 accumulator register is cleared,
// then for each of the K = 32 selected candidates (skipping invalid ones) the stage reads
// its V row from the Value SRAM, 8 x BF16 per clock over DV/LANES = 8 clocks, and the
// LANES = 8 BF16 MAC units add p * v into the matching 8 accumulator entries. A row whose V
// has not yet arrived (not written, or written for another query) is waited for (`v_stall`).
// The same accumulator entries are revisited only every 8 clocks, longer than the 3-clock
// read + MAC pipeline, so no hazard arises. When all rows are done and the pipeline is
// empty, A is offered on a_data (a_valid/a_ready); on acceptance the output buffer is
// released and `ctx_done` pulses. K, DV, 8 MAC lanes and the 64 x BF16 accumulator follow
// the paper; the schedule and handshakes are this design's choices.
module context_stage
  import camformer_pkg::*;
#(
  parameter int unsigned K     = 32,
  parameter int unsigned DV    = 64,
  parameter int unsigned LANES = 8,
  parameter int unsigned ROWS  = 128,
  localparam int unsigned CH   = DV / LANES,
  localparam int unsigned CW   = (CH > 1) ? $clog2(CH) : 1,
  localparam int unsigned RW   = $clog2(ROWS)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // output buffer
  input  logic                  ob_full,
  input  bf16_t [K-1:0]         ob_prob,
  input  logic  [K-1:0][RW-1:0] ob_slot,
  input  logic  [K-1:0]         ob_valid,
  output logic                  ob_release,
  // Value SRAM read side
  output logic                  vs_re,
  output logic [RW-1:0]         vs_rslot,
  output logic [CW-1:0]         vs_rchunk,
  input  logic [LANES*16-1:0]   vs_rdata,
  input  logic [ROWS-1:0]       vs_row_written,
  input  logic [ROWS-1:0]       vs_row_tag,
  // attention output
  output logic                  a_valid,
  output bf16_t [DV-1:0]        a_data,
  input  logic                  a_ready,
  output logic                  ctx_done,
  output logic                  v_stall
);
  localparam int unsigned KW = $clog2(K);

  typedef enum logic [1:0] {C_IDLE, C_RUN, C_DRAIN, C_OUT} state_t;
  state_t state;

  bf16_t [DV-1:0]  acc;
  logic [KW:0]     r;
  logic [CW-1:0]   ch;
  logic [2:0]      drain;
  logic            par;            // parity of the query being processed
  logic            rd_v;           // a Value SRAM word arrives this clock
  logic [CW-1:0]   rd_ch;
  bf16_t           rd_p;
  logic [LANES-1:0]           m_v;
  logic [LANES-1:0][CW-1:0]   m_tag;
  bf16_t [LANES-1:0]          m_y;
  logic            row_ok, row_valid;

  assign row_valid = (r < (KW+1)'(K)) && ob_valid[r[KW-1:0]];
  assign row_ok    = vs_row_written[ob_slot[r[KW-1:0]]] && (vs_row_tag[ob_slot[r[KW-1:0]]] == par);
  assign vs_re     = (state == C_RUN) && row_valid && row_ok;
  assign vs_rslot  = ob_slot[r[KW-1:0]];
  assign vs_rchunk = ch;
  assign v_stall   = (state == C_RUN) && row_valid && !row_ok;
  assign a_valid   = (state == C_OUT);
  assign a_data    = acc;

  for (genvar l = 0; l < LANES; l++) begin : g_mac
    bf16_mac #(.TAG_W(CW)) u_mac (
      .clk(clk), .rst_n(rst_n), .in_valid(rd_v), .in_tag(rd_ch),
      .a(rd_p), .b(vs_rdata[l*16 +: 16]), .c(acc[int'(rd_ch) * LANES + l]),
      .out_valid(m_v[l]), .out_tag(m_tag[l]), .y(m_y[l]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; acc <= '0; r <= '0; ch <= '0; drain <= '0; par <= 1'b0;
      rd_v <= 1'b0; rd_ch <= '0; rd_p <= '0; ob_release <= 1'b0; ctx_done <= 1'b0;
    end else begin
      ob_release <= 1'b0;
      ctx_done   <= 1'b0;
      rd_v  <= vs_re;
      rd_ch <= ch;
      rd_p  <= ob_prob[r[KW-1:0]];
      for (int l = 0; l < LANES; l++)
        if (m_v[l]) acc[int'(m_tag[l]) * LANES + l] <= m_y[l];
      case (state)
        C_IDLE: if (ob_full && !ob_release) begin
          acc <= '0; r <= '0; ch <= '0; state <= C_RUN;
        end
        C_RUN: begin
          if (r == (KW+1)'(K)) begin
            drain <= '0; state <= C_DRAIN;
          end else if (!row_valid) begin
            r <= r + 1'b1;
          end else if (row_ok) begin
            ch <= ch + 1'b1;
            if (ch == CW'(CH - 1)) begin ch <= '0; r <= r + 1'b1; end
          end
        end
        C_DRAIN: begin
          drain <= drain + 1'b1;
          if (drain == 3'd3) state <= C_OUT;
        end
        C_OUT: if (a_ready) begin
          ob_release <= 1'b1;
          ctx_done   <= 1'b1;
          par        <= ~par;
          state      <= C_IDLE;
        end
        default: state <= C_IDLE;
      endcase
    end
  end
endmodule
