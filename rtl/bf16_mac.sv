// bf16_mac: one two-stage pipelined BF16 multiply-accumulate unit.
//
// Stage 1 registers the product a*b together with the addend c and a tag; stage 2
// registers c + a*b. y/out_valid/out_tag follow in_valid by two clocks. The caller supplies
// the running sum as c, which lets eight of these units share one 64-entry accumulator
// register (see context_stage). Multiply and add round separately (not fused); that and
// the two-stage split are this design's choices, the BF16 MAC itself is the paper's.
module bf16_mac #(
  parameter int unsigned TAG_W = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  logic [15:0]      a,
  input  logic [15:0]      b,
  input  logic [15:0]      c,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output logic [15:0]      y
);
  logic [15:0]      prod, prod_r, c_r, sum;
  logic             v_r;
  logic [TAG_W-1:0] tag_r;

  bf16_mul u_mul (.a(a), .b(b), .y(prod));
  bf16_add u_add (.a(prod_r), .b(c_r), .y(sum));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_r <= 1'b0; tag_r <= '0; prod_r <= '0; c_r <= '0;
      out_valid <= 1'b0; out_tag <= '0; y <= '0;
    end else begin
      v_r       <= in_valid;
      tag_r     <= in_tag;
      prod_r    <= prod;
      c_r       <= c;
      out_valid <= v_r;
      out_tag   <= tag_r;
      y         <= sum;
    end
  end
endmodule
