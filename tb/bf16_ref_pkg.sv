// bf16_ref_pkg: reference BF16 conversions for the testbenches.
//
// to_real() widens a BF16 word to a double exactly (subnormals read as zero, like the
// design). from_real() rounds a double to the nearest BF16 (ties to even), flushing
// results below the normal range to zero and overflowing to infinity, which is the
// rounding the design's arithmetic units are meant to produce.
package bf16_ref_pkg;

  function automatic real to_real(logic [15:0] b);
    logic [63:0] d;
    if (b[14:7] == 8'd0) return 0.0;
    d = {b[15], 11'(int'(b[14:7]) - 127 + 1023), b[6:0], 45'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [15:0] from_real(real x);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;       // with hidden bit
    logic [8:0]  r;
    logic        g, st;
    d = $realtobits(x);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 15'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    r = {1'b0, m[52:45]};
    g = m[44];
    st = |m[43:0];
    if (g && (st || r[0])) r = r + 9'd1;
    if (r[8]) begin r = r >> 1; e = e + 1; end
    if (e >= 255) return {s, 8'hFF, 7'd0};
    if (e <= 0)   return {s, 15'd0};
    return {s, e[7:0], r[6:0]};
  endfunction

  // A random normal BF16 with exponent in [emin, emax].
  function automatic logic [15:0] rand_bf16(int emin, int emax);
    logic [7:0] e;
    e = 8'(emin + int'($urandom_range(emax - emin)));
    return {1'($urandom), e, 7'($urandom)};
  endfunction

endpackage
