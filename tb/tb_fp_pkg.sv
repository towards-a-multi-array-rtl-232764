// tb_fp_pkg: reference conversions between real (IEEE double) and IEEE
// single-precision bit patterns for the testbenches. The rounding is done
// here on the 52-bit double mantissa, independently of the RTL units:
// round to nearest, ties to even, results below the normal range flushed
// to zero (the convention of the RTL), overflow to infinity.
package tb_fp_pkg;

  function automatic logic [31:0] to_fp32(real r);
    logic [63:0] d;
    logic        s;
    int          e;
    logic [52:0] m;
    logic [23:0] mant;
    logic        g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e = int'(d[62:52]) - 1023 + 127;
    m = {1'b1, d[51:0]};
    mant = m[52:29];
    g    = m[28];
    st   = |m[27:0];
    if (g && (st || mant[0])) begin
      if (mant == 24'hFF_FFFF) begin
        mant = 24'h80_0000;
        e    = e + 1;
      end else begin
        mant = mant + 24'd1;
      end
    end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hFF, 23'd0};
    return {s, 8'(e), mant[22:0]};
  endfunction

  function automatic real from_fp32(logic [31:0] f);
    logic [63:0] d;
    if (f[30:23] == 8'd0) return 0.0;
    d = {f[31], 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0};
    return $bitstoreal(d);
  endfunction

  // Random normal number with exponent in [2^-emax, 2^emax).
  function automatic logic [31:0] rand_fp(int emax);
    int e;
    e = 127 + int'($urandom_range(2 * emax)) - emax;
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

endpackage
