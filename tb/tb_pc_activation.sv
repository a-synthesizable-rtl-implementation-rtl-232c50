// tb_pc_activation -- self-checking test of the three activation modes.
//
// One instance per mode sees the same input. Linear and ReLU outputs are
// checked bit-exactly; tanh and its derivative are compared with $tanh
// within the stated accuracy of the table interpolation (4e-4 and 8e-4),
// over random inputs in [-10, 10] and a few directed points (0, +-4, +-8,
// large values). The unit is combinational; each input is held for #1.
module tb_pc_activation;
  import pc_pkg::*;
  import fp_ref_pkg::*;

  fp32_t x, f_lin, fd_lin, f_relu, fd_relu, f_tanh, fd_tanh;
  int checks = 0, failures = 0;

  pc_activation #(.ACT(ACT_LINEAR)) u_lin  (.x(x), .f(f_lin),  .fd(fd_lin));
  pc_activation #(.ACT(ACT_RELU))   u_relu (.x(x), .f(f_relu), .fd(fd_relu));
  pc_activation #(.ACT(ACT_TANH))   u_tanh (.x(x), .f(f_tanh), .fd(fd_tanh));

  task automatic expect_bits(input fp32_t got, input fp32_t want, input string what);
    checks++;
    if (got !== want) begin
      failures++;
      if (failures < 20) $display("FAIL %s: x=%h got %h want %h", what, x, got, want);
    end
  endtask

  task automatic expect_near(input fp32_t got, input real want, input real tol, input string what);
    real g;
    g = from_fp32(got);
    checks++;
    if (!(g - want <= tol && want - g <= tol)) begin
      failures++;
      if (failures < 20) $display("FAIL %s: x=%h got %f want %f", what, x, g, want);
    end
  endtask

  task automatic apply(input fp32_t v);
    real xr, t;
    x = v;
    #1;
    xr = from_fp32(v);
    t  = $tanh(xr);
    expect_bits(f_lin, v, "linear f");
    expect_bits(fd_lin, FP_ONE, "linear f'");
    expect_bits(f_relu, (xr > 0.0) ? v : FP_POS_ZERO, "relu f");
    expect_bits(fd_relu, (xr > 0.0) ? FP_ONE : FP_POS_ZERO, "relu f'");
    expect_near(f_tanh, t, 4.0e-4, "tanh f");
    expect_near(fd_tanh, 1.0 - t * t, 8.0e-4, "tanh f'");
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    apply(FP_POS_ZERO);
    apply(FP_NEG_ZERO);
    apply(to_fp32(4.0));
    apply(to_fp32(-4.0));
    apply(to_fp32(8.0));
    apply(to_fp32(-7.999));
    apply(to_fp32(1.0e6));
    apply(to_fp32(1.0e-6));
    apply(to_fp32(0.5));
    for (int n = 0; n < 4000; n++)
      apply(to_fp32((real'($urandom_range(2000000)) / 100000.0) - 10.0));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
