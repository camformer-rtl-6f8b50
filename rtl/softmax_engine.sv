// softmax_engine: SoftMax over the 32 selected attention scores.
//
// Accepts the final Top-32 list (in_valid/in_ready). Accumulate phase: one LUT read per
// clock gives e_i = exp(s_i / sqrt(d_k)) (zero for an invalid candidate), which is stored
// and added into a single BF16 accumulator, so the denominator is complete 34 clocks after
// acceptance. Divide phase: once the output buffer is free, the 32 numerators enter the
// pipelined BF16 divider one per clock; quotients are written to the output buffer as they
// emerge, so the phase takes 31 + t_div clocks (t_div = divider latency), after which the
// buffer is committed. Structure (512 B LUT, one BF16 accumulator, one pipelined BF16
// divider, serial accumulate then divide) follows the paper; the cycle schedule is this
// design's. `ob_wait` is high while a finished denominator waits for the output buffer.
module softmax_engine
  import camformer_pkg::*;
#(
  parameter int unsigned K = 32
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 in_valid,
  input  cand_t [K-1:0]        in_cand,
  output logic                 in_ready,
  // output buffer write side
  input  logic                 ob_full,
  output logic                 ob_wr_en,
  output logic [$clog2(K)-1:0] ob_wr_idx,
  output bf16_t                ob_wr_prob,
  output logic [SLOT_W-1:0]    ob_wr_slot,
  output logic                 ob_wr_valid,
  output logic                 ob_commit,
  output logic                 ob_wait,
  output logic                 div_phase
);
  localparam int unsigned IW = $clog2(K);

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_WAIT, S_DIV} state_t;
  state_t state;

  cand_t [K-1:0]  c;
  bf16_t [K-1:0]  num;
  bf16_t          sum, sum_next, lut_q;
  logic [IW:0]    rd_i;        // LUT address counter (0..K)
  logic           acc_v;       // lut_q belongs to entry acc_i
  logic [IW-1:0]  acc_i;
  logic [IW:0]    iss_i, ret_n;
  logic           div_v;
  logic [IW-1:0]  div_tag;
  bf16_t          div_y;

  softmax_lut u_lut (.clk(clk), .addr(c[rd_i[IW-1:0]].score), .data(lut_q));

  bf16_t e_i;
  assign e_i = c[acc_i].valid ? lut_q : 16'h0000;
  bf16_add u_acc (.a(sum), .b(e_i), .y(sum_next));

  bf16_div #(.TAG_W(IW)) u_div (
    .clk(clk), .rst_n(rst_n),
    .in_valid(state == S_DIV && iss_i < (IW+1)'(K)),
    .in_tag(iss_i[IW-1:0]), .a(num[iss_i[IW-1:0]]), .b(sum),
    .out_valid(div_v), .out_tag(div_tag), .y(div_y));

  assign in_ready    = (state == S_IDLE);
  assign ob_wait     = (state == S_WAIT);
  assign div_phase   = (state == S_DIV);
  assign ob_wr_en    = div_v;
  assign ob_wr_idx   = div_tag;
  assign ob_wr_prob  = div_y;
  assign ob_wr_slot  = c[div_tag].slot;
  assign ob_wr_valid = c[div_tag].valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c <= '0; num <= '0; sum <= '0; rd_i <= '0; acc_v <= 1'b0;
      acc_i <= '0; iss_i <= '0; ret_n <= '0; ob_commit <= 1'b0;
    end else begin
      ob_commit <= 1'b0;
      case (state)
        S_IDLE: if (in_valid) begin
          c <= in_cand; sum <= '0; rd_i <= '0; acc_v <= 1'b0; state <= S_ACC;
        end
        S_ACC: begin
          // LUT read for rd_i this clock, accumulate the entry read last clock
          acc_v <= (rd_i < (IW+1)'(K));
          acc_i <= rd_i[IW-1:0];
          if (rd_i < (IW+1)'(K)) rd_i <= rd_i + 1'b1;
          if (acc_v) begin
            num[acc_i] <= e_i;
            sum        <= sum_next;
          end
          if (acc_v && acc_i == IW'(K - 1)) state <= S_WAIT;
        end
        S_WAIT: if (!ob_full) begin
          iss_i <= '0; ret_n <= '0; state <= S_DIV;
        end
        S_DIV: begin
          if (iss_i < (IW+1)'(K)) iss_i <= iss_i + 1'b1;
          if (div_v) ret_n <= ret_n + 1'b1;
          if (div_v && ret_n == (IW+1)'(K - 1)) begin
            ob_commit <= 1'b1;
            state     <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
