// tb_fp32_fma -- self-checking test of the binary32 fused multiply-add.
//
// Directed cases cover the special operands (zeros of both signs,
// infinities, NaN, invalid inf*0 and inf-inf), exact cancellation, round to
// nearest even on ties, overflow, and subnormal inputs and results. Random
// cases draw operands whose exact a*b+c fits in a double, so the expected
// value is the double result rounded once to binary32 by fp_ref_pkg. The
// unit is combinational; each vector is applied and checked after #1.
module tb_fp32_fma;
  import fp_ref_pkg::*;

  logic [31:0] a, b, c, y;
  int checks = 0, failures = 0;

  fp32_fma dut (.a(a), .b(b), .c(c), .y(y));

  task automatic check(input logic [31:0] ta, tb_, tc, input logic [31:0] exp_y, input string what);
    a = ta; b = tb_; c = tc;
    #1;
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 20)
        $display("FAIL %s: %h*%h+%h = %h, expected %h", what, ta, tb_, tc, y, exp_y);
    end
  endtask

  function automatic logic [31:0] ref_fma(input logic [31:0] ta, tb_, tc);
    return to_fp32(from_fp32(ta) * from_fp32(tb_) + from_fp32(tc));
  endfunction

  function automatic logic [31:0] rnd_fp(input int emin, input int emax);
    int e;
    e = emin + int'($urandom_range(emax - emin));
    return {1'($urandom), 8'(e), 23'($urandom)};
  endfunction

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] ra, rb, rc;
    int ep;
    // Directed cases
    check(32'h3F80_0000, 32'h4000_0000, 32'h0000_0000, 32'h4000_0000, "1*2+0");
    check(32'h3FC0_0000, 32'h3FC0_0000, 32'h3F80_0000, 32'h4050_0000, "1.5*1.5+1");
    check(32'h3F80_0000, 32'h3F80_0000, 32'hBF80_0000, 32'h0000_0000, "cancel to +0");
    check(32'h8000_0000, 32'h3F80_0000, 32'h8000_0000, 32'h8000_0000, "-0*1 + -0");
    check(32'h0000_0000, 32'h3F80_0000, 32'h8000_0000, 32'h0000_0000, "+0*1 + -0");
    check(32'h3F80_0000, 32'h4120_0000, 32'h8000_0000, 32'h4120_0000, "1*10 + -0");
    check(32'h7F80_0000, 32'h0000_0000, 32'h3F80_0000, 32'h7FC0_0000, "inf*0");
    check(32'h7F80_0000, 32'h3F80_0000, 32'hFF80_0000, 32'h7FC0_0000, "inf-inf");
    check(32'h7F80_0000, 32'hBF80_0000, 32'h3F80_0000, 32'hFF80_0000, "inf*-1+1");
    check(32'h3F80_0000, 32'h3F80_0000, 32'hFF80_0000, 32'hFF80_0000, "1+-inf");
    check(32'h7FC1_2345, 32'h3F80_0000, 32'h3F80_0000, 32'h7FC0_0000, "nan");
    check(32'h7F00_0000, 32'h4000_0000, 32'h0000_0000, 32'h7F80_0000, "overflow");
    // 1 + 2^-24 is a tie: rounds to 1.0 (even); 1+3*2^-24 rounds up.
    check(32'h3F80_0000, 32'h3F80_0000, 32'h3380_0000, 32'h3F80_0000, "tie to even down");
    check(32'h3F80_0001, 32'h3F80_0000, 32'h3380_0000, 32'h3F80_0002, "tie to even up");
    // Fused: (1+2^-23)^2 - 1 keeps the 2^-46 term.
    check(32'h3F80_0001, 32'h3F80_0001, 32'hBF80_0000, ref_fma(32'h3F80_0001, 32'h3F80_0001, 32'hBF80_0000), "fused");
    // Subnormal operand and results.
    check(32'h0000_0001, 32'h4B00_0000, 32'h0000_0000, 32'h0080_0000, "subnormal in");
    check(32'h0080_0000, 32'h3F00_0000, 32'h0000_0000, 32'h0040_0000, "subnormal out");
    check(32'h0080_0001, 32'h3F00_0000, 32'h0000_0000, 32'h0040_0000, "subnormal tie");
    check(32'h0080_0003, 32'h3F00_0000, 32'h0000_0000, 32'h0040_0002, "subnormal tie up");
    check(32'h0000_0003, 32'h0000_0005, 32'h0000_0001, 32'h0000_0001, "tiny product");

    // Random normal-range cases with the addend near the product.
    for (int n = 0; n < 20000; n++) begin
      ra = rnd_fp(100, 154);
      rb = rnd_fp(100, 154);
      ep = int'(ra[30:23]) + int'(rb[30:23]) - 127;
      rc = rnd_fp(ep - 3, ep + 3);
      check(ra, rb, rc, ref_fma(ra, rb, rc), "random near");
    end
    // Random cases with a far-away addend or a zero addend.
    for (int n = 0; n < 5000; n++) begin
      ra = rnd_fp(110, 144);
      rb = rnd_fp(110, 144);
      rc = (n % 5 == 0) ? 32'h0 : rnd_fp(1, 254);
      check(ra, rb, rc, ref_fma(ra, rb, rc), "random far");
    end
    // Random cases around the subnormal range.
    for (int n = 0; n < 5000; n++) begin
      ra = rnd_fp(0, 40);
      rb = rnd_fp(80, 120);
      ep = int'(ra[30:23]) + int'(rb[30:23]) - 127;
      rc = (n % 2 == 0) ? 32'h0 : rnd_fp((ep - 3 < 0) ? 0 : ep - 3, (ep + 3 < 3) ? 3 : ep + 3);
      check(ra, rb, rc, ref_fma(ra, rb, rc), "random subnormal");
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
