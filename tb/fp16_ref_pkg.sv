// fp16_ref_pkg -- reference FP16 arithmetic for the testbenches.
//
// Independent of the RTL: values are converted to double precision, the
// operation is done exactly in double (a product or sum of two FP16 numbers
// always fits in a double), and the exact result is rounded back to FP16
// with round-to-nearest-even by scaling with powers of two. The same number
// conventions as the RTL are modelled: subnormals read as zero, results
// below 2^-14 flush to signed zero, results of 2^16 or more become infinity.
package fp16_ref_pkg;

  function automatic real fp16_to_real(logic [15:0] h);
    real m;
    int  e;
    if (h[14:10] == 5'd0) return 0.0;
    m = 1.0 + real'(h[9:0]) / 1024.0;
    e = int'(h[14:10]) - 15;
    while (e > 0) begin m = m * 2.0; e--; end
    while (e < 0) begin m = m / 2.0; e++; end
    return h[15] ? -m : m;
  endfunction

  function automatic logic [15:0] real_to_fp16(real x);
    logic s;
    real  ax, m, fr;
    int   e;
    longint mi;
    if (x == 0.0) return 16'h0000;
    s  = (x < 0.0);
    ax = s ? -x : x;
    e  = 0;
    while (ax >= 2.0) begin ax = ax / 2.0; e++; end
    while (ax < 1.0)  begin ax = ax * 2.0; e--; end
    m  = ax * 1024.0;
    mi = longint'($floor(m));
    fr = m - real'(mi);
    if (fr > 0.5 || (fr == 0.5 && mi[0])) mi++;
    if (mi == 2048) begin mi = 1024; e++; end
    if (e < -14) return {s, 15'd0};
    if (e > 15)  return {s, 5'h1f, 10'd0};
    return {s, 5'(e + 15), 10'(mi - 1024)};
  endfunction

  function automatic logic [15:0] ref_mul(logic [15:0] a, logic [15:0] b);
    logic [15:0] r;
    r = real_to_fp16(fp16_to_real(a) * fp16_to_real(b));
    if (r[14:0] == 15'd0) r[15] = a[15] ^ b[15];
    return r;
  endfunction

  function automatic logic [15:0] ref_add(logic [15:0] a, logic [15:0] b);
    real x;
    x = fp16_to_real(a) + fp16_to_real(b);
    if (x == 0.0) begin
      if (a[14:10] == 5'd0 && b[14:10] == 5'd0) return {a[15] & b[15], 15'd0};
      if (a[14:10] == 5'd0) return {b[15], 15'd0};
      if (b[14:10] == 5'd0) return {a[15], 15'd0};
      return 16'h0000;
    end
    return real_to_fp16(x);
  endfunction

  // Random finite normal FP16 value with exponent field in [elo, ehi].
  function automatic logic [15:0] rand_fp16(int elo, int ehi);
    logic [15:0] r;
    r[15]    = 1'($urandom);
    r[14:10] = 5'(elo + int'($urandom % (ehi - elo + 1)));
    r[9:0]   = 10'($urandom);
    return r;
  endfunction

endpackage
