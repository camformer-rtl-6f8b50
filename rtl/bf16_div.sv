// bf16_div: pipelined BF16 (1/8/7) divider, one division accepted per clock.
//
// Restoring division of the 8-bit significands, one quotient bit per pipeline stage
// (10 bits: 8 result bits plus guard, with the remainder as sticky), followed by a
// normalise/round-to-nearest-even stage. An input accepted with `in_valid` appears on
// `y` with `out_valid` exactly 12 clocks later (t_div = 12), together with its `in_tag`.
// The paper asks for a pipelined BF16 divider so that 32 divisions take 31 + t_div
// cycles; the algorithm and t_div = 12 are this design's choices. Specials: x/0 and inf/x
// give infinity, 0/x and x/inf give zero, subnormals count as zero, NaN is not handled.
module bf16_div #(
  parameter int unsigned TAG_W = 5,
  localparam int unsigned NQ = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  logic [15:0]      a,
  input  logic [15:0]      b,
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output logic [15:0]      y
);
  typedef struct packed {
    logic             v;
    logic [TAG_W-1:0] tag;
    logic             s;
    logic [1:0]       spec;   // 0 normal, 1 zero result, 2 infinite result
    logic signed [10:0] e;
    logic [7:0]       mb;
    logic [9:0]       rem;
    logic [NQ-1:0]    q;
  } stage_t;

  stage_t st  [NQ+1];   // st[0]: unpacked inputs, st[k]: k quotient bits decided
  stage_t nxt [NQ+1];
  logic [15:0] y_nxt;

  always_comb begin
    // stage 0: unpack
    nxt[0].v   = in_valid;
    nxt[0].tag = in_tag;
    nxt[0].s   = a[15] ^ b[15];
    nxt[0].e   = 11'(signed'({3'b0, a[14:7]})) - 11'(signed'({3'b0, b[14:7]})) + 11'sd127;
    nxt[0].mb  = {1'b1, b[6:0]};
    nxt[0].rem = {2'b0, 1'b1, a[6:0]};
    nxt[0].q   = '0;
    if (a[14:7] == 8'd0 || b[14:7] == 8'hFF)      nxt[0].spec = 2'd1;
    else if (b[14:7] == 8'd0 || a[14:7] == 8'hFF) nxt[0].spec = 2'd2;
    else                                           nxt[0].spec = 2'd0;
    // stages 1..NQ: one restoring-division step each
    for (int k = 1; k <= NQ; k++) begin
      logic [9:0] r;
      r = (k == 1) ? st[k-1].rem : (st[k-1].rem << 1);
      nxt[k] = st[k-1];
      if (r >= {2'b0, st[k-1].mb}) begin
        nxt[k].rem = r - {2'b0, st[k-1].mb};
        nxt[k].q   = {st[k-1].q[NQ-2:0], 1'b1};
      end else begin
        nxt[k].rem = r;
        nxt[k].q   = {st[k-1].q[NQ-2:0], 1'b0};
      end
    end
  end

  // output stage: normalise and round
  always_comb begin
    logic [8:0] m;
    logic       g, sb;
    int         e;
    e = int'(st[NQ].e);
    if (st[NQ].q[9]) begin
      m = {1'b0, st[NQ].q[9:2]}; g = st[NQ].q[1]; sb = st[NQ].q[0] | (|st[NQ].rem);
    end else begin
      m = {1'b0, st[NQ].q[8:1]}; g = st[NQ].q[0]; sb = |st[NQ].rem; e = e - 1;
    end
    if (g && (sb || m[0])) m = m + 9'd1;
    if (m[8]) begin m = m >> 1; e = e + 1; end
    if (st[NQ].spec == 2'd1)      y_nxt = {st[NQ].s, 15'd0};
    else if (st[NQ].spec == 2'd2) y_nxt = {st[NQ].s, 8'hFF, 7'd0};
    else if (e >= 255)            y_nxt = {st[NQ].s, 8'hFF, 7'd0};
    else if (e <= 0)              y_nxt = {st[NQ].s, 15'd0};
    else                          y_nxt = {st[NQ].s, e[7:0], m[6:0]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k <= NQ; k++) st[k] <= '0;
      out_valid <= 1'b0; out_tag <= '0; y <= '0;
    end else begin
      for (int k = 0; k <= NQ; k++) st[k] <= nxt[k];
      out_valid <= st[NQ].v;
      out_tag   <= st[NQ].tag;
      y         <= y_nxt;
    end
  end
endmodule
