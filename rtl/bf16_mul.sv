// bf16_mul: combinational BF16 (1/8/7) multiplier.
//
// Multiplies the two 8-bit significands (hidden bit included), normalises the 16-bit
// product, and rounds to nearest even. Number handling is this design's choice, as the
// paper gives none: subnormal inputs count as zero, results below the normal range flush
// to signed zero, results above it and infinite inputs give infinity; NaN is not handled.
module bf16_mul (
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [15:0] y
);
  always_comb begin
    logic        s;
    logic [7:0]  ma, mb;
    logic [15:0] p;
    logic [8:0]  m;       // rounded significand with carry
    logic        g, st;
    int          e;
    s  = a[15] ^ b[15];
    ma = {1'b1, a[6:0]};
    mb = {1'b1, b[6:0]};
    p  = ma * mb;
    e  = int'(a[14:7]) + int'(b[14:7]) - 127;
    if (p[15]) begin
      m = {2'b01, p[14:8]}; g = p[7]; st = |p[6:0]; e = e + 1;
    end else begin
      m = {2'b01, p[13:7]}; g = p[6]; st = |p[5:0];
    end
    if (g && (st || m[0])) m = m + 9'd1;
    if (m[8]) begin m = m >> 1; e = e + 1; end
    if (a[14:7] == 8'd0 || b[14:7] == 8'd0)       y = {s, 15'd0};
    else if (a[14:7] == 8'hFF || b[14:7] == 8'hFF) y = {s, 8'hFF, 7'd0};
    else if (e >= 255)                            y = {s, 8'hFF, 7'd0};
    else if (e <= 0)                              y = {s, 15'd0};
    else                                          y = {s, e[7:0], m[6:0]};
  end
endmodule
