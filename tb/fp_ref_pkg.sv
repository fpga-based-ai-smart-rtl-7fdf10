// fp_ref_pkg: reference floating-point helpers for the testbenches.
//
// The simulator's shortreal type cannot be relied on, so single-precision
// values are converted to and from double precision by hand. Adding two
// singles in double precision and rounding the result once to single
// precision (round to nearest, ties to even) gives the correctly rounded
// single-precision sum, because a double carries more than twice the
// precision of a single plus two bits.
package fp_ref_pkg;

  function automatic real f2r(logic [31:0] x);
    logic [63:0] d;
    if (x[30:23] == 8'hff) begin
      d = {x[31], 11'h7ff, x[22:0] != 0, 51'd0};
      return $bitstoreal(d);
    end
    if (x[30:23] == 8'd0) begin
      real r;
      r = real'(x[22:0]) * (2.0 ** -149);
      return x[31] ? -r : r;
    end
    d = {x[31], 11'(int'(x[30:23]) - 127 + 1023), x[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  function automatic logic [31:0] r2f(real r);
    logic [63:0] d;
    logic        s;
    int          u, sh;
    logic [63:0] m, kept, rem, half;
    logic [31:0] res;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7ff) return (d[51:0] != 0) ? 32'h7fc0_0000 : {s, 8'hff, 23'd0};
    if (d[62:0] == 0) return {s, 31'd0};
    u = int'(d[62:52]) - 1023;
    m = {11'd0, 1'b1, d[51:0]};
    sh = 29 + ((u < -126) ? (-126 - u) : 0);
    if (sh >= 60) return {s, 31'd0};
    kept = m >> sh;
    rem  = m & ((64'd1 << sh) - 1);
    half = 64'd1 << (sh - 1);
    if (rem > half || (rem == half && kept[0])) kept = kept + 1;
    if (u < -126) begin
      res = {s, kept[30:0]};
    end else begin
      logic [63:0] bits;
      bits = (64'(u + 127) << 23) + kept - (64'd1 << 23);
      if (bits >= (64'd255 << 23)) return {s, 8'hff, 23'd0};
      res = {s, bits[30:0]};
    end
    return res;
  endfunction

  function automatic logic [31:0] fadd(logic [31:0] x, logic [31:0] z);
    return r2f(f2r(x) + f2r(z));
  endfunction

  function automatic bit is_nan(logic [31:0] v);
    return v[30:23] == 8'hff && v[22:0] != 0;
  endfunction

  // ---- BFP16 reference (8-bit shared exponent, sign + 7-bit magnitude) ----
  // Element i of a block is stored in bits [8i+7:8i] as {sign, mag}; the
  // shared exponent occupies bits [135:128].

  function automatic logic [135:0] bfp_encode(logic [31:0] x [16]);
    logic [135:0] o;
    int emax;
    real scale;
    emax = 0;
    for (int i = 0; i < 16; i++) if (int'(x[i][30:23]) > emax) emax = int'(x[i][30:23]);
    scale = 2.0 ** (emax - 127 - 6);
    o = '0;
    o[135:128] = 8'(emax);
    for (int i = 0; i < 16; i++) begin
      real v;
      int  m;
      if (x[i][30:23] == 0) continue;          // zero and subnormals count as zero
      v = f2r(x[i]);
      if (v < 0) v = -v;
      m = int'($floor(v / scale));
      if (m != 0) o[i*8 +: 8] = {x[i][31], 7'(m)};
    end
    return o;
  endfunction

  function automatic logic [31:0] bfp_decode_elem(logic [135:0] blk, int i);
    real v;
    int  m;
    logic [31:0] r;
    int  e;
    m = int'(blk[i*8 +: 7]);
    e = int'(blk[135:128]) - 127 - 6;
    v = real'(m) * (2.0 ** e);
    if (m == 0 || v < 2.0 ** -126) return 32'd0;
    r = r2f(v);
    r[31] = blk[i*8+7];
    return r;
  endfunction

endpackage
