// fp32_fma -- IEEE-754 binary32 fused multiply-add, y = a*b + c.
//
// The one arithmetic primitive of the neural core. A multiply is issued as
// a*b + (-0), an add as 1*b + c, and a multiply-accumulate as a*b + acc; in
// every case the exact result is rounded once, to nearest with ties to even
// (the only rounding mode the network uses).
//
// How it works: both operands of the final addition are first normalised to
// a 48-bit significand with the leading one in bit 47 (the 24x24-bit product
// is exact; subnormal inputs are normalised by a leading-zero count). The
// operand with the smaller exponent is shifted right into a 52-bit window
// that has three guard bits; bits shifted past the window are ORed into its
// least significant bit as a sticky bit. After the add or subtract the sum is
// renormalised, shifted right again if the result is subnormal, and rounded.
// Subnormal inputs and outputs are fully supported; overflow gives infinity,
// invalid operations give the canonical quiet NaN 0x7FC00000, and an exact
// zero sum is +0 unless both addends are -0.
//
// Interface: purely combinational, no clock. Inputs and output are plain
// IEEE-754 words.
//
// The source description uses single precision with round-to-nearest-even in
// an internal recoded format; this unit keeps the standard interchange
// encoding everywhere, which is this design's own choice and gives the same
// numerical results.
module fp32_fma
  import pc_pkg::*;
(
  input  fp32_t a,
  input  fp32_t b,
  input  fp32_t c,
  output fp32_t y
);

  // Number of leading zeros of a 48-bit or 52-bit vector.
  function automatic int lzc48(input logic [47:0] v);
    int n;
    n = 48;
    for (int i = 0; i < 48; i++) if (v[i]) n = 47 - i;
    return n;
  endfunction

  function automatic int lzc52(input logic [51:0] v);
    int n;
    n = 52;
    for (int i = 0; i < 52; i++) if (v[i]) n = 51 - i;
    return n;
  endfunction

  // Field decode
  logic       sa, sb, sc;
  logic [7:0] ea, eb, ec;
  logic [22:0] fa, fb, fc;
  assign {sa, ea, fa} = a;
  assign {sb, eb, fb} = b;
  assign {sc, ec, fc} = c;

  logic a_zero, b_zero, c_zero, a_inf, b_inf, c_inf, a_nan, b_nan, c_nan;
  assign a_zero = (ea == 8'd0) && (fa == 23'd0);
  assign b_zero = (eb == 8'd0) && (fb == 23'd0);
  assign c_zero = (ec == 8'd0) && (fc == 23'd0);
  assign a_inf  = (ea == 8'hFF) && (fa == 23'd0);
  assign b_inf  = (eb == 8'hFF) && (fb == 23'd0);
  assign c_inf  = (ec == 8'hFF) && (fc == 23'd0);
  assign a_nan  = (ea == 8'hFF) && (fa != 23'd0);
  assign b_nan  = (eb == 8'hFF) && (fb != 23'd0);
  assign c_nan  = (ec == 8'hFF) && (fc != 23'd0);

  logic sp;
  assign sp = sa ^ sb;

  fp32_t y_arith;

  always_comb begin
    logic [23:0]  ma, mb, mc;
    logic [47:0]  mp, mpn, mcn, bgo, sml;
    int           lzp, lzcc, ep, ecx, eb_big, d, dsat, lz, er, rs;
    logic         s_big, s_small, s_res, sticky, sub, st, g, rup;
    logic [114:0] ext;
    logic [51:0]  big_al, small_al, sum, sn, sn2;
    logic [115:0] ext2;
    logic [23:0]  sig;
    logic [24:0]  sig25;

    ma = {(ea != 8'd0), fa};
    mb = {(eb != 8'd0), fb};
    mc = {(ec != 8'd0), fc};

    // Exact product, normalised so that its leading one is bit 47.
    mp  = ma * mb;
    lzp = lzc48(mp);
    mpn = mp << lzp;
    ep  = ((ea == 8'd0) ? 1 : int'(ea)) + ((eb == 8'd0) ? 1 : int'(eb)) - 127 + 1 - lzp;

    // Addend, normalised the same way. A zero addend gets an exponent far
    // below any product so that it is always the operand shifted out.
    lzcc = lzc48({mc, 24'd0});
    mcn  = {mc, 24'd0} << lzcc;
    ecx  = c_zero ? -1000 : (((ec == 8'd0) ? 1 : int'(ec)) - lzcc);

    if (ep >= ecx) begin
      bgo = mpn; sml = mcn; s_big = sp; s_small = sc; eb_big = ep; d = ep - ecx;
    end else begin
      bgo = mcn; sml = mpn; s_big = sc; s_small = sp; eb_big = ecx; d = ecx - ep;
    end

    // Alignment with sticky collection.
    dsat     = (d > 63) ? 63 : d;
    ext      = {sml, 3'b000, 64'd0} >> dsat;
    sticky   = |ext[63:0];
    big_al   = {1'b0, bgo, 3'b000};
    small_al = {1'b0, ext[114:64]} | {51'd0, sticky};

    sub = s_big ^ s_small;
    if (!sub) begin
      sum = big_al + small_al; s_res = s_big;
    end else if (big_al >= small_al) begin
      sum = big_al - small_al; s_res = s_big;
    end else begin
      sum = small_al - big_al; s_res = s_small;
    end

    // Normalise: leading one to bit 51. Bit 50 carries weight 2^(eb_big-127).
    lz = lzc52(sum);
    sn = sum << ((lz > 51) ? 0 : lz);
    er = eb_big + (51 - lz) - 50;

    // Subnormal result: shift right until the exponent is the minimum one.
    st   = 1'b0;
    rs   = 0;
    ext2 = '0;
    if (er < 1) begin
      rs   = 1 - er;
      if (rs > 63) rs = 63;
      ext2 = {sn, 64'd0} >> rs;
      sn2  = ext2[115:64];
      st   = |ext2[63:0];
      er   = 1;
    end else begin
      sn2 = sn;
    end

    // Round to nearest, ties to even.
    sig   = sn2[51:28];
    g     = sn2[27];
    st    = st | (|sn2[26:0]);
    rup   = g & (st | sig[0]);
    sig25 = {1'b0, sig} + {24'd0, rup};
    if (sig25[24]) begin
      sig = sig25[24:1];
      er  = er + 1;
    end else begin
      sig = sig25[23:0];
    end

    if (sum == 52'd0)
      y_arith = FP_POS_ZERO;
    else if (er >= 255)
      y_arith = {s_res, 8'hFF, 23'd0};
    else
      y_arith = {s_res, (sig[23] ? er[7:0] : 8'd0), sig[22:0]};
  end

  // Special operands
  always_comb begin
    if (a_nan || b_nan || c_nan)
      y = FP_QNAN;
    else if ((a_inf && b_zero) || (a_zero && b_inf))
      y = FP_QNAN;
    else if ((a_inf || b_inf) && c_inf && (sp != sc))
      y = FP_QNAN;
    else if (a_inf || b_inf)
      y = {sp, 8'hFF, 23'd0};
    else if (c_inf)
      y = c;
    else if (a_zero || b_zero)
      y = c_zero ? {sp & sc, 31'd0} : c;
    else
      y = y_arith;
  end

endmodule
