// fp_ref_pkg -- reference conversions between double-precision reals and
// IEEE-754 binary32 bit patterns, for the testbenches.
//
// The simulator holds shortreal values in double precision, so rounding to
// single precision is done here explicitly from the double's fields:
// round to nearest, ties to even, with subnormal results and overflow to
// infinity. A double holds the exact product of two binary32 values, so
// to_fp32(from_fp32(a) * from_fp32(b)) is the correctly rounded product, and
// the same holds for a multiply-add whenever its exact value fits in 53 bits.
package fp_ref_pkg;

  function automatic logic [31:0] to_fp32(input real r);
    logic [63:0]  d;
    logic         s;
    int           e, fe, sh;
    logic [127:0] m;
    logic [23:0]  sig;
    logic [24:0]  sig25;
    logic         g, st;
    d = $realtobits(r);
    s = d[63];
    if (d[62:52] == 11'h7FF) return (d[51:0] != 0) ? 32'h7FC0_0000 : {s, 8'hFF, 23'd0};
    if (d[62:52] == 11'd0) return {s, 31'd0};
    e  = int'(d[62:52]) - 1023;
    fe = e + 127;
    m  = {1'b1, d[51:0], 75'd0};
    if (fe < 1) begin
      sh = 1 - fe;
      if (sh > 127) sh = 127;
      st = 1'b0;
      for (int i = 0; i < sh; i++) st = st | m[i];
      m  = m >> sh;
      m[0] = m[0] | st;
      fe = 1;
    end
    sig = m[127:104];
    g   = m[103];
    st  = |m[102:0];
    sig25 = {1'b0, sig} + {24'd0, (g & (st | sig[0]))};
    if (sig25[24]) begin
      sig = sig25[24:1];
      fe  = fe + 1;
    end else sig = sig25[23:0];
    if (fe >= 255) return {s, 8'hFF, 23'd0};
    return {s, (sig[23] ? fe[7:0] : 8'd0), sig[22:0]};
  endfunction

  function automatic real from_fp32(input logic [31:0] f);
    real v;
    if (f[30:23] == 8'd0)
      v = real'(f[22:0]) * (2.0 ** (-149));
    else
      v = $bitstoreal({1'b0, 11'(int'(f[30:23]) - 127 + 1023), f[22:0], 29'd0});
    return f[31] ? -v : v;
  endfunction

  // Round a real to the nearest binary32 and return it as a real.
  function automatic real q32(input real r);
    return from_fp32(to_fp32(r));
  endfunction

endpackage
