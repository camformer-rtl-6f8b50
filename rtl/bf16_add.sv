// bf16_add: combinational BF16 (1/8/7) adder.
//
// Orders the operands by magnitude, aligns the smaller significand with 10 extra low bits
// (the lowest one sticky), adds or subtracts, renormalises with a leading-one search and
// rounds to nearest even. Number handling is this design's choice: subnormal inputs count
// as zero, underflow flushes to zero, overflow gives infinity, infinite inputs pass
// through; NaN is not handled. Used for the SoftMax denominator and inside the MACs.
module bf16_add (
  input  logic [15:0] a,
  input  logic [15:0] b,
  output logic [15:0] y
);
  always_comb begin
    logic [15:0] big, sml;
    logic [17:0] xb, xs, lost;
    logic [18:0] sum;
    logic [17:0] nrm;
    logic [8:0]  m;
    logic        g, st, sgn;
    int          d, e, msb;
    if (a[14:0] >= b[14:0]) begin big = a; sml = b; end
    else                    begin big = b; sml = a; end
    sgn = big[15];
    xb  = (big[14:7] == 8'd0) ? 18'd0 : {1'b1, big[6:0], 10'd0};
    xs  = (sml[14:7] == 8'd0) ? 18'd0 : {1'b1, sml[6:0], 10'd0};
    d   = int'(big[14:7]) - int'(sml[14:7]);
    if (d >= 18) begin
      lost = xs; xs = 18'd0;
    end else begin
      lost = xs & ((18'd1 << d) - 18'd1);
      xs   = xs >> d;
    end
    xs[0] = xs[0] | (|lost);
    sum = (big[15] == sml[15]) ? ({1'b0, xb} + {1'b0, xs}) : ({1'b0, xb} - {1'b0, xs});
    e   = int'(big[14:7]);
    msb = 0;
    for (int i = 0; i < 19; i++) if (sum[i]) msb = i;
    if (sum[18]) begin
      nrm = sum[18:1]; nrm[0] = nrm[0] | sum[0]; e = e + 1;
    end else begin
      nrm = sum[17:0] << (17 - msb); e = e - (17 - msb);
    end
    m  = {1'b0, nrm[17:10]};
    g  = nrm[9];
    st = |nrm[8:0];
    if (g && (st || m[0])) m = m + 9'd1;
    if (m[8]) begin m = m >> 1; e = e + 1; end
    if (big[14:7] == 8'hFF)      y = big;
    else if (sum == 19'd0)       y = 16'd0;
    else if (xb == 18'd0)        y = 16'd0;
    else if (e >= 255)           y = {sgn, 8'hFF, 7'd0};
    else if (e <= 0)             y = {sgn, 15'd0};
    else                         y = {sgn, e[7:0], m[6:0]};
  end
endmodule
